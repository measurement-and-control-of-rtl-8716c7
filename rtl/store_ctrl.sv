// store_ctrl: sampling windows of the store operation.
//
// A store command from the sequencer names the inputs to record, the window
// length in clocks and the SDRAM line where the window is to be added. While
// the window is open the controller drives the buffer's write mask with the
// chosen inputs; it notes the buffer address of the first word and counts
// the words the buffer accepted. When the window closes it queues a transfer
// job {first buffer word, word count, SDRAM line} for the transfer engine.
//
// Timing: a command sampled at edge t opens the window for the input words
// sampled at edges t+1 .. t+len (the same convention as the matching units,
// so a store and a match started together see the same words). The job is
// queued at edge t+len+1. A command arriving while a window is open is
// dropped and sets `collision`; a full job queue sets `job_ovf`.
// From the paper: windows under sequencer control, transfer to a chosen
// SDRAM address. This design's choice: one window at a time, the job queue
// of JOBS entries, the error flags.
module store_ctrl
  import presto_pkg::*;
#(
  parameter int unsigned NIN   = NCH,
  parameter int unsigned WORDS = 2**18,
  parameter int unsigned JOBS  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cmd_valid,
  input  store_arg_t                cmd,
  // to the buffer
  output logic [NIN-1:0]            wmask,
  input  logic [$clog2(WORDS)-1:0]  wptr,
  input  logic [$clog2(NIN+1)-1:0]  wr_count,
  // job queue to the transfer engine
  output logic                      job_valid,
  output logic [$clog2(WORDS)-1:0]  job_start,
  output logic [31:0]               job_words,
  output logic [SDRAM_LINE_AW-1:0]  job_line,
  input  logic                      job_pop,
  output logic                      active,
  output logic                      collision,
  output logic                      job_ovf
);
  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned JW = $clog2(JOBS);

  typedef struct packed {
    logic [AW-1:0]            start;
    logic [31:0]              words;
    logic [SDRAM_LINE_AW-1:0] line;
  } job_t;

  job_t   q [JOBS];
  logic [JW:0] wr_p, rd_p;
  logic [28:0] left;
  logic        first;
  job_t        cur;
  logic        closing;

  logic [NIN-1:0] cur_mask;
  assign wmask = active ? cur_mask : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cur_mask <= '0; left <= '0; first <= 1'b0; cur <= '0;
      closing <= 1'b0; wr_p <= '0; rd_p <= '0; collision <= 1'b0; job_ovf <= 1'b0;
    end else begin
      closing <= 1'b0;
      if (cmd_valid) begin
        if (active || closing) collision <= 1'b1;
        else if (cmd.len != 0) begin
          active   <= 1'b1;
          cur_mask <= cmd.ch_mask[NIN-1:0];
          left     <= cmd.len;
          first    <= 1'b1;
          cur.words <= '0;
          cur.line  <= cmd.sdram_line;
        end
      end
      if (active) begin
        // this clock's words are written at the coming edge at wptr
        if (first) cur.start <= wptr;
        first     <= 1'b0;
        cur.words <= cur.words + 32'(wr_count);
        left      <= left - 1'b1;
        if (left == 1) begin
          active  <= 1'b0;
          closing <= 1'b1;
        end
      end
      if (closing) begin
        if ((wr_p - rd_p) == (JW+1)'(JOBS)) job_ovf <= 1'b1;
        else if (cur.words != 0) begin
          q[wr_p[JW-1:0]] <= cur;
          wr_p <= wr_p + 1'b1;
        end
      end
      if (job_pop && job_valid) rd_p <= rd_p + 1'b1;
    end
  end

  assign job_valid = (wr_p != rd_p);
  assign job_start = q[rd_p[JW-1:0]].start;
  assign job_words = q[rd_p[JW-1:0]].words;
  assign job_line  = q[rd_p[JW-1:0]].line;
endmodule
