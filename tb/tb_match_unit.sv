// tb_match_unit: checks template matching against a direct computation.
//
// A random reference template is written and random signal words are fed
// in. For each window the bench computes sum(tau_i*s_i + tau_q*s_q) over the
// window words itself and compares it with `result`. It also checks the
// latency (valid exactly L+2 edges after the start edge), that a start
// during a window is ignored, and that windows can follow one another.
module tb_match_unit;
  import presto_pkg::*;
  localparam int D = 40;
  logic clk = 0, rst_n = 0, wr_en = 0, len_we = 0, start = 0;
  logic [5:0] wr_addr = 0, len_data = 0;
  iq2_t wr_data = '0, s = '0;
  logic signed [47:0] result;
  logic valid, busy;
  int checks = 0, failures = 0, cyc = 0;
  iq2_t tmpl [D];
  iq2_t sig [4096];

  match_unit #(.DEPTH(D)) dut (.*);
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic iq2_t rnd();
    iq2_t w;
    w = {$urandom, $urandom};
    return w;
  endfunction

  // s during the cycle after edge n is sig[n]
  always @(negedge clk) s = sig[cyc % 4096];

  function automatic longint window_sum(input int first, input int len);
    longint acc = 0;
    for (int j = 0; j < len; j++) begin
      iq2_t w = sig[(first + j) % 4096];
      for (int k = 0; k < 2; k++)
        acc += longint'(tmpl[j][k].i) * longint'(w[k].i) + longint'(tmpl[j][k].q) * longint'(w[k].q);
    end
    return acc;
  endfunction

  // start at the next edge; returns that edge number
  task automatic do_start(output int t);
    @(negedge clk) start = 1;
    @(posedge clk) t = cyc + 1;
    @(negedge clk) start = 0;
  endtask

  task automatic check_window(input int t, input int len);
    // window words are sampled at edges t+1..t+len: s after edge t..t+len-1
    longint exp_sum = window_sum(t, len);
    int vcyc = -1;
    while (cyc < t + len + 6) begin
      @(negedge clk);
      if (valid && cyc > t + 2) vcyc = cyc;
      if (valid && cyc > t + 2) begin
        checks++;
        if (longint'(result) != exp_sum) begin
          failures++; $display("result %0d exp %0d", result, exp_sum);
        end
      end
    end
    checks++;
    if (vcyc != t + len + 2) begin
      failures++; $display("valid at %0d exp %0d", vcyc, t + len + 2);
    end
  endtask

  initial begin
    int t, t2;
    for (int i = 0; i < 4096; i++) sig[i] = rnd();
    for (int j = 0; j < D; j++) tmpl[j] = rnd();
    tmpl[3] = {16'sh7fff, 16'sh8000, 16'sh8000, 16'sh8000};   // extremes
    sig[100] = {16'sh8000, 16'sh8000, 16'sh8000, 16'sh8000};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < D; j++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(j); wr_data = tmpl[j];
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 40; r++) begin
      automatic int len = (r == 0) ? D : (r == 1) ? 1 : 1 + ($urandom % D);
      @(negedge clk); len_we = 1; len_data = 6'(len);
      @(negedge clk); len_we = 0;
      do_start(t);
      if (r == 2) begin
        // a start in the middle of the window must not disturb it
        repeat (2) @(negedge clk);
        start = 1; @(negedge clk); start = 0;
      end
      check_window(t, len);
    end
    // back to back: second start on the edge after the last sampled word
    @(negedge clk); len_we = 1; len_data = 6'd5;
    @(negedge clk); len_we = 0;
    do_start(t);
    repeat (4) @(negedge clk);        // now after edge t+5 (last word)
    do_start(t2);
    checks++;
    if (t2 != t + 6) begin failures++; $display("back-to-back timing"); end
    check_window(t2, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
