// tb_sample_buffer: checks packing, ring order, read-out and overflow.
//
// Four inputs, a 64-word buffer. Random subsets of inputs write random words;
// the bench keeps its own queue of the words in the order they should be
// packed (clock by clock, ascending input number) and reads the buffer back
// through the read port, one word per clock, comparing every word. Reads and
// writes overlap in the second phase, the ring wraps several times, and the
// buffer is driven past full: a clock that does not fit must be dropped
// whole and set `overflow`.
module tb_sample_buffer;
  import presto_pkg::*;
  localparam int NIN = 4, WORDS = 64;
  logic clk = 0, rst_n = 0;
  logic [NIN-1:0] wmask = 0;
  iq2_t din [NIN];
  logic [5:0] wptr, rd_addr = 0;
  logic [2:0] wr_count;
  logic rd_en = 0, ovf_clr = 0, overflow;
  iq2_t rd_data;
  logic [6:0] occupancy;
  int checks = 0, failures = 0;
  iq2_t q [$];
  int occ = 0, rp = 0, drops = 0;

  sample_buffer #(.NIN(NIN), .WORDS(WORDS)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive one clock: optional write with mask m, optional read
  logic pend_rd = 0;
  iq2_t pend_exp;
  logic [2:0] wrc_q;
  int exp_wrc = 0;
  always @(posedge clk) wrc_q <= wr_count;
  task automatic step(input logic [NIN-1:0] m, input bit rd);
    int n = $countones(m);
    bit fits;
    int pushed;
    @(negedge clk);
    // check the read issued in the previous clock
    if (pend_rd) begin
      checks++;
      if (rd_data !== pend_exp) begin failures++; $display("read %h exp %h", rd_data, pend_exp); end
    end
    pend_rd = 0;
    checks++;
    if (int'(wrc_q) != exp_wrc) begin failures++; $display("wr_count %0d exp %0d", wrc_q, exp_wrc); end
    wmask = m;
    for (int c = 0; c < NIN; c++) din[c] = {$urandom, $urandom};
    fits = (occ + n) <= WORDS;
    exp_wrc = fits ? n : 0;
    pushed = 0;
    if (fits) begin
      pushed = n;
      for (int c = 0; c < NIN; c++) if (m[c]) q.push_back(din[c]);
      occ += n;
    end else drops++;
    rd_en = 0;
    if (rd && q.size() > pushed) begin
      rd_en = 1; rd_addr = 6'(rp); rp = (rp + 1) % WORDS;
      pend_exp = q.pop_front(); pend_rd = 1; occ--;
    end
  endtask

  initial begin
    for (int c = 0; c < NIN; c++) din[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: write only, then read all back
    for (int i = 0; i < 10; i++) step(4'($urandom), 0);
    while (q.size() > 0) step(4'b0, 1);
    // phase 2: overlapped traffic, several wraps
    for (int i = 0; i < 400; i++) step(4'($urandom), 1);
    while (q.size() > 0) step(4'b0, 1);
    step(4'b0, 0);
    checks++;
    if (overflow !== (drops > 0)) begin failures++; $display("overflow flag %b, drops %0d", overflow, drops); end
    ovf_clr = 1; @(negedge clk); ovf_clr = 0;
    drops = 0;
    // phase 3: all inputs, no reads -> overflow
    for (int i = 0; i < 20; i++) step(4'hF, 0);
    step(4'b0, 0);
    checks++;
    if (!overflow || drops == 0) begin failures++; $display("no overflow"); end
    checks++;
    if (int'(occupancy) != occ) begin failures++; $display("occupancy %0d exp %0d", occupancy, occ); end
    while (q.size() > 0) step(4'b0, 1);
    step(4'b0, 0);
    ovf_clr = 1; @(negedge clk); ovf_clr = 0;
    checks++;
    if (overflow) begin failures++; $display("overflow not cleared"); end
    $display("dropped clocks: %0d", drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
