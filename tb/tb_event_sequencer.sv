// tb_event_sequencer: checks event dispatch, timing and repetitions.
//
// Events of every opcode are uploaded for two repetitions before the start.
// Each dispatched command must appear one clock after the sequence timer
// reaches its time (so at now == T + 1), carry the uploaded arguments, and
// events of different classes with the same time must all be dispatched in
// the same clock. The marker write must respect its mask, the bias value
// must land on its channel with a one-clock strobe, OP_END must restart the
// timer, and after `nrep` = 2 repetitions the run must stop with `done`
// and a 64-bit run counter equal to the number of clocks run (31 + 21).
module tb_event_sequencer;
  import presto_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, flush = 0, ev_valid = 0, ev_ready;
  logic [31:0] nrep = 2, rep_count;
  logic running, done, late, run_clr;
  logic [47:0] now;
  logic [63:0] run_cycles;
  event_t ev = '0;
  logic tmpl_valid, sel_valid, store_valid, match_valid;
  tmpl_arg_t tmpl_cmd; sel_arg_t sel_cmd; store_arg_t store_cmd; match_arg_t match_cmd;
  logic [3:0] marker, trig_in = 0, trig_sync;
  logic [15:0] bias [16];
  logic [15:0] bias_upd;
  int checks = 0, failures = 0;
  int seen_tmpl = 0, seen_sel = 0, seen_store = 0, seen_match = 0;

  event_sequencer #(.QDEPTH(16)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input int t, input opcode_e op, input logic [ARG_W-1:0] arg);
    @(negedge clk);
    ev.time_ = 48'(t); ev.op = op; ev.arg = arg; ev_valid = 1;
    checks++;
    if (!ev_ready) begin failures++; $display("upload refused"); end
    @(negedge clk) ev_valid = 0;
  endtask

  task automatic expect_at(input string what, input int t);
    checks++;
    if (now != 48'(t + 1)) begin failures++; $display("%s at now=%0d exp %0d", what, now, t + 1); end
  endtask

  always @(negedge clk) if (running || done) begin
    if (tmpl_valid) begin
      seen_tmpl++;
      expect_at("template", seen_tmpl == 1 ? 10 : 5);
      checks++;
      if (tmpl_cmd.tmpl_mask != 16'h0003 || tmpl_cmd.ch_mask != 16'h0001 || !tmpl_cmd.loop) begin
        failures++; $display("template args");
      end
    end
    if (sel_valid)   begin seen_sel++;   expect_at("select", 10);
      checks++; if (sel_cmd.gain_idx != 9'd77) begin failures++; $display("select args"); end end
    if (store_valid) begin seen_store++; expect_at("store", 12);
      checks++; if (store_cmd.len != 29'd9) begin failures++; $display("store args"); end end
    if (match_valid) begin seen_match++; expect_at("match", 12);
      checks++; if (match_cmd.unit_mask != 128'h5) begin failures++; $display("match args"); end end
    if (|bias_upd) begin
      expect_at("bias", 16);
      checks++;
      if (bias_upd != 16'h0008 || bias[3] != 16'd1234) begin failures++; $display("bias"); end
    end
    if (now == 48'd16 && rep_count == 0) begin
      checks++;
      if (marker != 4'b1001) begin failures++; $display("marker %b", marker); end
    end
  end

  initial begin
    tmpl_arg_t ta; sel_arg_t sa; store_arg_t sta; match_arg_t ma; io_arg_t ia;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ta = '0; ta.tmpl_mask = 16'h3; ta.ch_mask = 16'h1; ta.loop = 1;
    sa = '0; sa.gain_idx = 9'd77; sa.set_gain = 1;
    sta = '0; sta.len = 29'd9; sta.ch_mask = 16'h3;
    ma = '0; ma.unit_mask = 128'h5;
    put(10, OP_TEMPLATE, ta);
    put(10, OP_SELECT, sa);
    put(12, OP_STORE, sta);
    put(12, OP_MATCH, ma);
    ia = '0; ia.mark_mask = 4'b1111; ia.mark_val = 4'b1000; put(14, OP_MARKER, ia);
    ia = '0; ia.mark_mask = 4'b0011; ia.mark_val = 4'b0001; put(15, OP_MARKER, ia);
    ia = '0; ia.bias_ch = 4'd3; ia.bias_val = 16'd1234; put(16, OP_BIAS, ia);
    put(30, OP_END, '0);
    put(5, OP_TEMPLATE, ta);        // repetition 1
    put(20, OP_END, '0);
    trig_in = 4'b0110;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (trig_sync != 4'b0110) begin failures++; $display("trigger sync"); end
    wait (done);
    @(negedge clk);
    checks++;
    if (running || run_cycles != 64'd52 || rep_count != 2 || late) begin
      failures++; $display("end: running %b cycles %0d reps %0d late %b", running, run_cycles, rep_count, late);
    end
    checks++;
    if (seen_tmpl != 2 || seen_sel != 1 || seen_store != 1 || seen_match != 1) begin
      failures++; $display("counts %0d %0d %0d %0d", seen_tmpl, seen_sel, seen_store, seen_match);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
