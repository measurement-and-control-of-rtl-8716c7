// timed_fifo: a time-controlled FIFO of events.
//
// Entries are pushed in time order, each with its execution time (in clocks
// of the sequence timer), the repetition number it belongs to (modulo
// 2**EW) and a payload. While the sequencer runs, the head entry is released
// (`fire` for one clock, with its payload) in the clock where the sequence
// time `now` equals its time and its repetition number equals the current
// one. A head whose time has already passed in the current repetition is
// released at once and sets the sticky `late` flag, so a queue that cannot
// keep up is reported rather than silently skipped. At most one entry is
// released per clock.
//
// Timing: an entry at the head fires combinationally in the matching clock;
// the pop takes effect at the following edge. A pushed entry can fire one
// clock after the push. From the paper: time-controlled FIFO buffers on a
// 2 ns grid feeding the sequencer. This design's choice: the repetition tag,
// the late rule, the depth.
module timed_fifo
  import presto_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = ARG_W + 4,
  parameter int unsigned EW    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  // producer side
  input  logic              push_valid,
  output logic              push_ready,
  input  logic [TIME_W-1:0] push_time,
  input  logic [EW-1:0]     push_rep,
  input  logic [W-1:0]      push_data,
  // sequencer side
  input  logic              run,
  input  logic [TIME_W-1:0] now,
  input  logic [EW-1:0]     rep,
  output logic              fire,
  output logic [W-1:0]      fire_data,
  output logic              late,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    logic [TIME_W-1:0] t;
    logic [EW-1:0]     r;
    logic [W-1:0]      d;
  } entry_t;

  entry_t      mem [DEPTH];
  logic [AW:0] wp, rp;
  entry_t      head;
  logic        nonempty;

  assign nonempty   = (wp != rp);
  assign level      = ($clog2(DEPTH+1))'(wp - rp);
  assign push_ready = (wp - rp) != (AW+1)'(DEPTH);
  assign head       = mem[rp[AW-1:0]];
  assign fire       = run && nonempty && head.r == rep && head.t <= now;
  assign fire_data  = head.d;

  always_ff @(posedge clk) begin
    if (push_valid && push_ready) mem[wp[AW-1:0]] <= '{t: push_time, r: push_rep, d: push_data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; late <= 1'b0;
    end else if (flush) begin
      wp <= '0; rp <= '0; late <= 1'b0;
    end else begin
      if (push_valid && push_ready) wp <= wp + 1'b1;
      if (fire) begin
        rp <= rp + 1'b1;
        if (head.t < now) late <= 1'b1;
      end
    end
  end
endmodule
