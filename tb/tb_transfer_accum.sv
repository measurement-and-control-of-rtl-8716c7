// tb_transfer_accum: checks accumulation into SDRAM and the transfer rate.
//
// The bench holds a 256-word buffer image with a one-clock read and the
// SDRAM model. Three jobs are run, the third aimed at the same lines as the
// first and the second overlapping the first, with random back-pressure on
// the SDRAM; afterwards every touched line must hold the sum, per 32-bit
// value, of all sign-extended samples added to it, computed by the bench.
// A last job of 128 words without back-pressure must finish within
// 128 + 20 clocks, i.e. at one word (two IQ pairs) per clock.
module tb_transfer_accum;
  import presto_pkg::*;
  localparam int WORDS = 256;
  logic clk = 0, rst_n = 0;
  logic job_valid = 0, job_pop;
  logic [7:0] job_start = 0, buf_rd_addr;
  logic [31:0] job_words = 0;
  logic [26:0] job_line = 0;
  logic buf_rd_en, busy;
  iq2_t buf_rd_data;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [26:0] rd_req_line, wr_line;
  logic [127:0] rd_resp_data, wr_data;
  int checks = 0, failures = 0;
  iq2_t bufm [WORDS];
  longint expv [logic [26:0]][4];
  bit stall = 1;

  transfer_accum #(.WORDS(WORDS), .DEPTH(16)) dut (.*);
  always #1 clk = ~clk;
  always @(posedge clk) buf_rd_data <= bufm[buf_rd_addr];

  sdram_model #(.LAT(5)) mem_stall (.clk, .rst_n, .stall_en(stall), .rd_valid(rd_req_valid),
    .rd_ready(rd_req_ready), .rd_line(rd_req_line), .resp_valid(rd_resp_valid),
    .resp_data(rd_resp_data), .wr_valid(wr_valid), .wr_ready, .wr_line, .wr_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_job(input int start, input int words, input int line, output int cycles);
    for (int j = 0; j < words; j++) begin
      automatic iq2_t w = bufm[(start + j) % WORDS];
      automatic logic [26:0] l = 27'(line + j);
      if (!expv.exists(l)) for (int v = 0; v < 4; v++) expv[l][v] = 0;
      expv[l][0] += w[0].i; expv[l][1] += w[0].q; expv[l][2] += w[1].i; expv[l][3] += w[1].q;
    end
    @(negedge clk);
    job_valid = 1; job_start = 8'(start); job_words = 32'(words); job_line = 27'(line);
    cycles = 0;
    do begin @(posedge clk); cycles++; end while (!job_pop);
    @(negedge clk) job_valid = 0;
  endtask

  initial begin
    int c;
    for (int i = 0; i < WORDS; i++) bufm[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(10, 40, 100, c);
    run_job(30, 50, 120, c);          // overlaps lines 120..139
    run_job(10, 40, 100, c);          // same lines again: averaging
    run_job(240, 30, 5000, c);        // wraps in the buffer
    stall = 0;
    run_job(0, 128, 7000, c);
    checks++;
    if (c > 128 + 20) begin failures++; $display("128 words took %0d clocks", c); end
    repeat (5) @(negedge clk);
    foreach (expv[l]) begin
      automatic logic [127:0] got = mem_stall.peek(l);
      for (int v = 0; v < 4; v++) begin
        checks++;
        if ($signed(got[32*v +: 32]) != 32'(expv[l][v])) begin
          failures++;
          if (failures < 10) $display("line %0d value %0d: %0d exp %0d", l, v, $signed(got[32*v +: 32]), expv[l][v]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
