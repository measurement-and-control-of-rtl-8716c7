// transfer_accum: moves store-buffer data into SDRAM, adding as it goes.
//
// For every job queued by the store controller it reads the job's buffer
// words one per clock. For each word it reads the SDRAM line at the job's
// target (line = four 32-bit values: I0, Q0, I1, Q1 from the low end), adds
// the four sign-extended 16-bit samples to the stored values and writes the
// line back. Repeating the same target accumulates, which is how averaging
// and interleaved averaging are done.
//
// Pipelining: buffer words wait in a pending queue until their SDRAM read
// data returns (in order, any latency), the sums wait in a write queue until
// the SDRAM accepts them. A counter of lines in flight (issued, not yet
// written) stops issue at DEPTH, so neither queue can overflow. Before the
// next job starts, all writes of the current one must have been accepted,
// so a later job aimed at the same lines always reads the updated values.
//
// Timing: one line per clock (1 GS/s complex) while the SDRAM keeps up.
// Interface: SDRAM read requests with valid/ready, read data with a valid
// only (never stalled), writes with valid/ready. From the paper: transfer at
// 1 GS/s, 32-bit values, each transfer aimed at a chosen address, new data
// summed with the stored data. This design's choice: the port protocol, the
// line format and the queue depth.
module transfer_accum
  import presto_pkg::*;
#(
  parameter int unsigned WORDS = 2**18,
  parameter int unsigned DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // job queue
  input  logic                      job_valid,
  input  logic [$clog2(WORDS)-1:0]  job_start,
  input  logic [31:0]               job_words,
  input  logic [SDRAM_LINE_AW-1:0]  job_line,
  output logic                      job_pop,
  // buffer read port
  output logic                      buf_rd_en,
  output logic [$clog2(WORDS)-1:0]  buf_rd_addr,
  input  iq2_t                      buf_rd_data,
  // SDRAM
  output logic                      rd_req_valid,
  input  logic                      rd_req_ready,
  output logic [SDRAM_LINE_AW-1:0]  rd_req_line,
  input  logic                      rd_resp_valid,
  input  logic [127:0]              rd_resp_data,
  output logic                      wr_valid,
  input  logic                      wr_ready,
  output logic [SDRAM_LINE_AW-1:0]  wr_line,
  output logic [127:0]              wr_data,
  output logic                      busy
);
  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned DW = $clog2(DEPTH);

  typedef struct packed {
    logic [SDRAM_LINE_AW-1:0] line;
    logic [127:0]             data;
  } wr_t;

  logic                     running;
  logic [AW-1:0]            addr;
  logic [SDRAM_LINE_AW-1:0] line;
  logic [31:0]              left;
  logic [DW:0]              inflight;
  logic                     issue, buf_v;
  logic [SDRAM_LINE_AW-1:0] buf_line;

  iq2_t        pend   [DEPTH];
  logic [SDRAM_LINE_AW-1:0] pend_l [DEPTH];
  logic [DW:0] pw, pr;
  wr_t         wq [DEPTH];
  logic [DW:0] ww, wr;
  iq2_t        sdat;
  logic [SDRAM_LINE_AW-1:0] sline;
  logic        pend_empty;
  logic        wpop;

  assign issue        = running && left != 0 && inflight < (DW+1)'(DEPTH) && rd_req_ready;
  assign rd_req_valid = running && left != 0 && inflight < (DW+1)'(DEPTH);
  assign rd_req_line  = line;
  assign buf_rd_en    = issue;
  assign buf_rd_addr  = addr;
  assign pend_empty   = (pw == pr);
  // the buffer word of a read answered at once may still be on its way in
  assign sdat  = pend_empty ? buf_rd_data : pend[pr[DW-1:0]];
  assign sline = pend_empty ? buf_line    : pend_l[pr[DW-1:0]];
  assign wpop  = wr_valid && wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; addr <= '0; line <= '0; left <= '0; inflight <= '0;
      buf_v <= 1'b0; buf_line <= '0; pw <= '0; pr <= '0; ww <= '0; wr <= '0;
    end else begin
      // job start / end
      if (!running && job_valid) begin
        running <= 1'b1;
        addr    <= job_start;
        line    <= job_line;
        left    <= job_words;
      end else if (running && left == 0 && inflight == 0) begin
        running <= 1'b0;
      end
      if (issue) begin
        addr <= addr + 1'b1;
        line <= line + 1'b1;
        left <= left - 1'b1;
      end
      inflight <= inflight + (DW+1)'(issue) - (DW+1)'(wpop);
      // buffer data arrives one clock after the read
      buf_v    <= issue;
      buf_line <= line;
      if (buf_v && !(rd_resp_valid && pend_empty)) begin
        pend[pw[DW-1:0]]   <= buf_rd_data;
        pend_l[pw[DW-1:0]] <= buf_line;
        pw <= pw + 1'b1;
      end
      // SDRAM read data: add and queue the write
      if (rd_resp_valid) begin
        if (!pend_empty) pr <= pr + 1'b1;
        wq[ww[DW-1:0]].line <= sline;
        for (int k = 0; k < SPC; k++) begin
          wq[ww[DW-1:0]].data[64*k +: 32]    <= rd_resp_data[64*k +: 32]    + 32'(sdat[k].i);
          wq[ww[DW-1:0]].data[64*k+32 +: 32] <= rd_resp_data[64*k+32 +: 32] + 32'(sdat[k].q);
        end
        ww <= ww + 1'b1;
      end
      if (wpop) wr <= wr + 1'b1;
    end
  end

  assign job_pop  = running && left == 0 && inflight == 0;
  assign wr_valid = (ww != wr);
  assign wr_line  = wq[wr[DW-1:0]].line;
  assign wr_data  = wq[wr[DW-1:0]].data;
  assign busy     = running;

  // read data can only answer an issued read
  a_resp_has_data: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> (!pend_empty || buf_v));
endmodule
