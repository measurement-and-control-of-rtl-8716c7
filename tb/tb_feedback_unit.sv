// tb_feedback_unit: checks pair sums, thresholds, the operator and latency.
//
// Random matching results and thresholds are applied; the bench computes
// each R = (res[2p] + res[2p+1] > theta[p]) and each mask bit from the care
// and value vectors itself. The qutrit-reset operator of the paper's truth
// table is programmed on mask bits 0 and 1 (pi_eg = R_eg & !R_fe, pi_fg =
// R_fe & !R_gf) and the qubit-reset operator (R0) on bit 2; all eight
// combinations of R_eg, R_fe, R_gf are driven. The mask must follow a new
// result after exactly three clocks. Equality with the threshold gives 0.
module tb_feedback_unit;
  import presto_pkg::*;
  localparam int NP = 64;
  logic clk = 0, rst_n = 0;
  logic signed [47:0] res [2*NP];
  logic thr_we = 0, op_we = 0;
  logic [5:0] thr_idx = 0;
  logic signed [48:0] thr_data = 0;
  logic [2:0] op_bit = 0;
  logic [NP-1:0] op_care = 0, op_val = 0, r_o;
  logic [7:0] mask;
  int checks = 0, failures = 0;
  longint thr [NP];
  logic [NP-1:0] care [8], val [8];

  feedback_unit #(.NP(NP)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NP-1:0] exp_r();
    logic [NP-1:0] r;
    for (int p = 0; p < NP; p++) r[p] = (longint'(res[2*p]) + longint'(res[2*p+1])) > thr[p];
    return r;
  endfunction

  function automatic logic [7:0] exp_mask(input logic [NP-1:0] r);
    logic [7:0] m;
    for (int k = 0; k < 8; k++) begin
      m[k] = 1'b1;
      for (int p = 0; p < NP; p++) if (care[k][p] && r[p] != val[k][p]) m[k] = 1'b0;
    end
    return m;
  endfunction

  task automatic apply_and_check(input string what);
    logic [NP-1:0] r;
    logic [7:0] m;
    r = exp_r();
    m = exp_mask(r);
    @(negedge clk);                    // edge 1: pair sums
    @(negedge clk);                    // edge 2: compare
    checks++;
    if (r_o !== r) begin failures++; $display("%s: R %h exp %h", what, r_o, r); end
    @(negedge clk);                    // edge 3: mask
    checks++;
    if (mask !== m) begin failures++; $display("%s: mask %b exp %b", what, mask, m); end
  endtask

  task automatic set_op(input int k, input logic [NP-1:0] c, input logic [NP-1:0] v);
    @(negedge clk); op_we = 1; op_bit = 3'(k); op_care = c; op_val = v;
    care[k] = c; val[k] = v;
    @(negedge clk); op_we = 0;
  endtask

  initial begin
    for (int i = 0; i < 2*NP; i++) res[i] = '0;
    for (int p = 0; p < NP; p++) thr[p] = 0;
    for (int k = 0; k < 8; k++) begin care[k] = '0; val[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random thresholds
    for (int p = 0; p < NP; p++) begin
      @(negedge clk); thr_we = 1; thr_idx = 6'(p);
      thr[p] = longint'($signed({$urandom, $urandom})) >>> 20;
      thr_data = 49'(thr[p]);
    end
    @(negedge clk); thr_we = 0;
    // qutrit operator (pairs 0 = eg, 1 = fe, 2 = gf) and qubit operator
    set_op(0, 64'b011, 64'b001);
    set_op(1, 64'b110, 64'b010);
    set_op(2, 64'b001, 64'b001);
    for (int k = 3; k < 8; k++) set_op(k, {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom}, {$urandom, $urandom});
    // all eight combinations of the first three comparisons
    for (int c = 0; c < 8; c++) begin
      for (int p = 0; p < 3; p++) begin
        res[2*p]   = 48'(thr[p] / 2 + (c[p] ? 1000 : -1000));
        res[2*p+1] = 48'(thr[p] - thr[p] / 2);
      end
      apply_and_check("qutrit");
      checks++;
      case (c[2:0])   // expected pulses from the truth table
        3'b001: if (mask[1:0] !== 2'b01) begin failures++; $display("state e"); end
        3'b010: if (mask[1:0] !== 2'b10) begin failures++; $display("state f"); end
        3'b100: if (mask[1:0] !== 2'b00) begin failures++; $display("state g"); end
        default: ;
      endcase
    end
    // equality with the threshold is not "greater"
    res[0] = 48'(thr[0]); res[1] = '0;
    apply_and_check("equal");
    checks++; if (r_o[0] !== 1'b0) begin failures++; $display("equality gave 1"); end
    // random results
    for (int n = 0; n < 40; n++) begin
      for (int i = 0; i < 2*NP; i++) res[i] = 48'($signed({$urandom, $urandom}) >>> 21);
      apply_and_check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
