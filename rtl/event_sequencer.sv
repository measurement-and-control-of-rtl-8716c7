// event_sequencer: the programmable-logic half of the event sequencer.
//
// The processor side fills the queues with timed events before and during a
// run (events of one class in time order); this block executes them on a
// 2 ns grid. It keeps a 48-bit sequence timer, counting from 0 at the start
// of every repetition, and a 64-bit counter of all clocks of the run.
// Events are sorted by opcode into NQ time-controlled FIFOs (templates,
// table selects, store windows, matching windows, I/O), so events of
// different classes can execute in the same clock. An event fires when the
// timer reaches its time and it is dispatched to its target:
//   OP_TEMPLATE / OP_SELECT  -> signal generators (channel mask inside)
//   OP_STORE / OP_MATCH      -> store controller / matching units
//   OP_MARKER                -> the marker outputs (masked write)
//   OP_BIAS                  -> one of the DC-bias values, with a strobe
//   OP_END                   -> ends a repetition: the timer restarts at 0;
//                               after `nrep` repetitions the run is done.
// Each queued event is tagged with the repetition it belongs to (counted by
// the OP_END events pushed before it), so events of the next repetition wait
// instead of being taken as late.
//
// Timing: an event with time T fires in the clock where the timer shows T
// and its command leaves this block registered, one clock later, on the
// *_valid outputs. `start` clears the timer and pulses `run_clr` to restart
// the carrier accumulators. From the paper: 2 ns grid, 48-bit sequence time
// (about 6.5 days), 64-bit total run time, time-controlled FIFOs, sequencer
// control of templates, carriers, scalers, store, matching, markers and DC
// bias. This design's choice: event format, per-class queues, repetition
// tags, queue depth, 2-flop synchronizers on the trigger inputs (the paper
// says only that the inputs are available to the logic and the sequencer).
module event_sequencer
  import presto_pkg::*;
#(
  parameter int unsigned QDEPTH = 512
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control from the processor
  input  logic                 start,
  input  logic                 flush,
  input  logic [31:0]          nrep,
  output logic                 running,
  output logic                 done,
  output logic                 late,
  output logic [TIME_W-1:0]    now,
  output logic [RUN_W-1:0]     run_cycles,
  output logic [31:0]          rep_count,
  // event upload
  input  logic                 ev_valid,
  output logic                 ev_ready,
  input  event_t               ev,
  // dispatched commands
  output logic                 run_clr,
  output logic                 tmpl_valid,
  output tmpl_arg_t            tmpl_cmd,
  output logic                 sel_valid,
  output sel_arg_t             sel_cmd,
  output logic                 store_valid,
  output store_arg_t           store_cmd,
  output logic                 match_valid,
  output match_arg_t           match_cmd,
  output logic [NMARK-1:0]     marker,
  output logic [15:0]          bias [NBIAS],
  output logic [NBIAS-1:0]     bias_upd,
  // trigger inputs
  input  logic [NTRIG-1:0]     trig_in,
  output logic [NTRIG-1:0]     trig_sync
);
  localparam int unsigned EW = 4;
  localparam int unsigned W  = ARG_W + 4;

  logic [EW-1:0]        push_rep, rep;
  logic [NQ-1:0]        q_ready, q_fire, q_late;
  logic [W-1:0]         q_data [NQ];
  logic [NTRIG-1:0]     trig_m;
  int unsigned          qsel;

  assign qsel     = queue_of(ev.op);
  assign ev_ready = q_ready[qsel];

  for (genvar q = 0; q < NQ; q++) begin : g_q
    logic [$clog2(QDEPTH+1)-1:0] level_unused;
    timed_fifo #(.DEPTH(QDEPTH), .W(W), .EW(EW)) u_q (
      .clk, .rst_n, .flush,
      .push_valid(ev_valid && qsel == q), .push_ready(q_ready[q]),
      .push_time(ev.time_), .push_rep(push_rep), .push_data({ev.op, ev.arg}),
      .run(running), .now, .rep, .fire(q_fire[q]), .fire_data(q_data[q]),
      .late(q_late[q]), .level(level_unused));
  end

  assign late = |q_late;

  // repetition tag of the events being pushed
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     push_rep <= '0;
    else if (flush) push_rep <= '0;
    else if (ev_valid && ev_ready && ev.op == OP_END) push_rep <= push_rep + 1'b1;
  end

  opcode_e io_op;
  io_arg_t io_arg;
  assign io_op  = opcode_e'(q_data[Q_IO][W-1 -: 4]);
  assign io_arg = io_arg_t'(q_data[Q_IO][ARG_W-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done <= 1'b0; now <= '0; run_cycles <= '0; rep <= '0;
      rep_count <= '0; run_clr <= 1'b0;
      tmpl_valid <= 1'b0; sel_valid <= 1'b0; store_valid <= 1'b0; match_valid <= 1'b0;
      tmpl_cmd <= '0; sel_cmd <= '0; store_cmd <= '0; match_cmd <= '0;
      marker <= '0; bias_upd <= '0;
      for (int b = 0; b < NBIAS; b++) bias[b] <= '0;
      trig_m <= '0; trig_sync <= '0;
    end else begin
      trig_m    <= trig_in;
      trig_sync <= trig_m;
      run_clr   <= start;
      if (start) begin
        running <= 1'b1; done <= 1'b0; now <= '0; run_cycles <= '0;
        rep <= '0; rep_count <= '0;
      end else if (running) begin
        now        <= now + 1'b1;
        run_cycles <= run_cycles + 1'b1;
      end
      // dispatch
      tmpl_valid  <= q_fire[Q_TEMPLATE];
      tmpl_cmd    <= tmpl_arg_t'(q_data[Q_TEMPLATE][ARG_W-1:0]);
      sel_valid   <= q_fire[Q_SELECT];
      sel_cmd     <= sel_arg_t'(q_data[Q_SELECT][ARG_W-1:0]);
      store_valid <= q_fire[Q_STORE];
      store_cmd   <= store_arg_t'(q_data[Q_STORE][ARG_W-1:0]);
      match_valid <= q_fire[Q_MATCH];
      match_cmd   <= match_arg_t'(q_data[Q_MATCH][ARG_W-1:0]);
      bias_upd    <= '0;
      if (q_fire[Q_IO]) begin
        case (io_op)
          OP_MARKER: marker <= (marker & ~io_arg.mark_mask) | (io_arg.mark_val & io_arg.mark_mask);
          OP_BIAS: begin
            bias[io_arg.bias_ch]     <= io_arg.bias_val;
            bias_upd[io_arg.bias_ch] <= 1'b1;
          end
          OP_END: begin
            now       <= '0;
            rep       <= rep + 1'b1;
            rep_count <= rep_count + 1'b1;
            if (rep_count + 1 >= nrep) begin
              running <= 1'b0;
              done    <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
