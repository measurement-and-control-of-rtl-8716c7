// tb_template_player: checks playback of one output template.
//
// A 12-word template of known values is written with length 10. The checks
// cover: a single play (words 0..9 appear from start edge + 1, then zeros),
// looping (the sequence repeats until a stop), the envelope flag, and
// gating: a conditional start with the selected mask bit 0 plays nothing,
// with the bit 1 it plays.
module tb_template_player;
  import presto_pkg::*;
  localparam int D = 12;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, len_we = 0, start = 0, stop = 0, loop = 0, envelope = 0, cond = 0;
  logic [3:0] wr_addr = 0;
  logic [3:0] len_data = 0;
  iq2_t wr_data = '0, dout;
  logic [2:0] cond_bit = 0;
  logic [7:0] fb_mask = 0;
  logic env_o, busy;
  int checks = 0, failures = 0;

  template_player #(.DEPTH(D)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic iq2_t word(input int a);
    iq2_t w;
    w[0].i = 16'(100 + a); w[0].q = 16'(-200 - a);
    w[1].i = 16'(3000 * a - 7); w[1].q = 16'(a * a);
    return w;
  endfunction

  task automatic expect_word(input iq2_t e, input string what);
    checks++;
    if (dout !== e) begin
      failures++;
      $display("%s: got %h exp %h", what, dout, e);
    end
  endtask

  // issue a start at the next edge and return after that edge
  task automatic do_start(input logic lp, input logic env, input logic cd, input logic [2:0] cb);
    @(negedge clk);
    start = 1; loop = lp; envelope = env; cond = cd; cond_bit = cb;
    @(negedge clk);
    start = 0; loop = 0; cond = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 4'(a); wr_data = word(a);
    end
    @(negedge clk); wr_en = 0; len_we = 1; len_data = 10;
    @(negedge clk); len_we = 0;
    // idle output is zero
    expect_word('0, "idle");
    // single play: start sampled at edge t; we are now at negedge after t
    do_start(0, 1, 0, 0);
    checks++; if (env_o !== 1'b1) begin failures++; $display("envelope flag"); end
    for (int a = 0; a < 10; a++) begin
      @(negedge clk);
      expect_word(word(a), "single");
    end
    @(negedge clk); expect_word('0, "end of single");
    @(negedge clk); expect_word('0, "end of single 2");
    // looping play for 25 words then stop
    do_start(1, 0, 0, 0);
    checks++; if (env_o !== 1'b0) begin failures++; $display("raw flag"); end
    for (int a = 0; a < 25; a++) begin
      @(negedge clk);
      expect_word(word(a % 10), "loop");
    end
    stop = 1; @(negedge clk); stop = 0;
    @(negedge clk); @(negedge clk);
    expect_word('0, "after stop");
    // gated start: mask bit 3 clear -> nothing
    fb_mask = 8'b1111_0111;
    do_start(0, 0, 1, 3);
    for (int a = 0; a < 12; a++) begin
      @(negedge clk); expect_word('0, "gated off");
    end
    // gated start: mask bit 3 set -> plays
    fb_mask = 8'b0000_1000;
    do_start(0, 0, 1, 3);
    for (int a = 0; a < 10; a++) begin
      @(negedge clk); expect_word(word(a), "gated on");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
