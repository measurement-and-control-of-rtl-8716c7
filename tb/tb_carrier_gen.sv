// tb_carrier_gen: checks the carrier generator against real-valued cos/sin.
//
// A frequency word and independent I and Q phase offsets are applied, the
// accumulator is cleared, and every output sample after the pipeline delay
// is compared with cos(2*pi*(n*2f + k*f + phi_i)/2**40) and the matching
// sine of the Q angle, to within 8 LSB of 32767, where n counts clocks from
// the clear minus the 19-clock pipeline delay, so the delay is checked too.
// Three frequencies (one negative) and three offset pairs are used.
module tb_carrier_gen;
  import presto_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [39:0] freq, ph_i, ph_q;
  iq2_t carrier;
  int checks = 0, failures = 0;
  localparam int LAT = 19;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  localparam real TWO_PI = 6.283185307179586;

  carrier_gen dut (.clk, .rst_n, .clr, .freq, .phase_i(ph_i), .phase_q(ph_q), .carrier);
  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_run(input logic [39:0] f, input int ncyc);
    real turns, ei, eq;
    freq = f;
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;          // cleared at the edge before this
    // m-th edge after the clearing edge carries accumulator phase (m-LAT)*2f
    for (int m = 1; m <= ncyc; m++) begin
      @(negedge clk);
      if (m >= LAT) begin
        for (int k = 0; k < 2; k++) begin
          turns = ((real'(m - LAT) * 2.0 + real'(k)) * real'(f) + real'(ph_i)) / 1099511627776.0;
          ei = 32767.0 * $cos(TWO_PI * turns);
          turns = ((real'(m - LAT) * 2.0 + real'(k)) * real'(f) + real'(ph_q)) / 1099511627776.0;
          eq = 32767.0 * $sin(TWO_PI * turns);
          checks++;
          if (fabs(real'(carrier[k].i) - ei) > 8.0 || fabs(real'(carrier[k].q) - eq) > 8.0) begin
            failures++;
            if (failures < 10)
              $display("mismatch m=%0d k=%0d got %0d,%0d exp %f,%f", m, k,
                       carrier[k].i, carrier[k].q, ei, eq);
          end
        end
      end
    end
  endtask

  initial begin
    freq = 0; ph_i = 0; ph_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ph_i = 40'h00_0000_0000; ph_q = 40'h00_0000_0000;
    check_run(40'd12345678901, 200);          // about 11 MHz
    ph_i = 40'h40_0000_0000; ph_q = 40'hC0_1234_5678;   // independent offsets
    check_run(40'd98765432109, 200);
    ph_i = 40'h12_3456_789A; ph_q = 40'h9A_0000_0001;
    check_run(40'hFF_FFFF_0000, 120);         // negative frequency
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
