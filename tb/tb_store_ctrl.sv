// tb_store_ctrl: checks store windows and the transfer jobs they queue.
//
// The bench plays the buffer: it supplies a write pointer and the number of
// words accepted each clock. It checks that the write mask equals the chosen
// inputs for exactly `len` clocks starting right after the command edge, that
// the queued job holds the first word address, the accepted word count and
// the SDRAM line, that a command during an open window is dropped and flags
// `collision`, and that jobs queue up and pop in order.
module tb_store_ctrl;
  import presto_pkg::*;
  localparam int NIN = 4, WORDS = 256;
  logic clk = 0, rst_n = 0, cmd_valid = 0, job_pop = 0;
  store_arg_t cmd = '0;
  logic [NIN-1:0] wmask;
  logic [7:0] wptr = 0, job_start;
  logic [2:0] wr_count;
  logic job_valid, active, collision, job_ovf;
  logic [31:0] job_words;
  logic [26:0] job_line;
  int checks = 0, failures = 0, cyc = 0;

  store_ctrl #(.NIN(NIN), .WORDS(WORDS), .JOBS(4)) dut (.*);
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  // buffer stand-in: accepts every word
  assign wr_count = 3'($countones(wmask));
  always @(posedge clk) wptr <= wptr + 8'(wr_count);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_start[$], exp_words[$], exp_line[$];

  task automatic window(input logic [3:0] m, input int len, input int line, input bit collide);
    int t, first;
    @(negedge clk);
    cmd = '0; cmd.ch_mask = 16'(m); cmd.len = 29'(len); cmd.sdram_line = 27'(line); cmd_valid = 1;
    @(posedge clk) t = cyc + 1;
    @(negedge clk) cmd_valid = 0;
    first = int'(wptr);
    for (int i = 0; i < len; i++) begin
      checks++;
      if (wmask !== m) begin failures++; $display("mask %b exp %b at %0d", wmask, m, i); end
      if (collide && i == 1) begin
        cmd_valid = 1; cmd.len = 29'd3;
      end else cmd_valid = 0;
      @(negedge clk);
    end
    cmd_valid = 0;
    checks++;
    if (wmask !== '0) begin failures++; $display("window too long"); end
    exp_start.push_back(first);
    exp_words.push_back(len * $countones(m));
    exp_line.push_back(line);
  endtask

  task automatic pop_and_check();
    @(negedge clk);
    checks++;
    if (!job_valid) begin failures++; $display("no job"); end
    else if (int'(job_start) != exp_start[0] || int'(job_words) != exp_words[0] ||
             int'(job_line) != exp_line[0]) begin
      failures++;
      $display("job %0d/%0d/%0d exp %0d/%0d/%0d", job_start, job_words, job_line,
               exp_start[0], exp_words[0], exp_line[0]);
    end
    void'(exp_start.pop_front()); void'(exp_words.pop_front()); void'(exp_line.pop_front());
    job_pop = 1; @(negedge clk); job_pop = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    window(4'b0101, 7, 1000, 0);
    window(4'b1111, 3, 2000, 1);
    checks++;
    if (!collision) begin failures++; $display("collision not flagged"); end
    window(4'b1000, 20, 3000, 0);
    repeat (3) @(negedge clk);
    pop_and_check();
    pop_and_check();
    pop_and_check();
    checks++;
    if (job_valid) begin failures++; $display("extra job"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
