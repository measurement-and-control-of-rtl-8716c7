// tb_presto_top: end-to-end test of the pulsed-mode design at reduced size.
//
// Four channels, eight matching units, 32-word templates, 8-entry tables, a
// 256-word store buffer and 64-entry event queues keep the simulation short;
// the scenario:
//
// Run 1, NREP repetitions of an active-reset experiment on input/output 0:
//   T=2   select gain 0.5 on output 0 (both groups) and output 1 group 1,
//         with a quarter-turn Q offset at frequency 0 on output 1 group 1
//   T=4   start matching units 0 (tau_e) and 1 (-tau_g) on input 0, and a
//         16-clock store window on inputs 0 and 1 into SDRAM line 100
//   T=34  conditional pi pulse: template 0 of output 0, gated by mask bit 0;
//         marker 0 on
//   T=36  output 1 template 8 as looped envelope; stopped at T=56
//   T=40  DC bias 3 set; T=50 marker 0 off; T=70 end of repetition
// The input alternates between the excited (odd repetitions) and ground
// response. Checks: matching results equal the bench's own sums, the pi
// pulse is output exactly in excited repetitions with the right samples,
// the mask follows a new result three clocks after the matching unit
// reports it, the store windows of all repetitions are summed in SDRAM,
// markers and bias follow their events.
// Run 2: a store window on every input longer than the buffer can hold
// (overflow) and an event queued behind a later one (late).
module tb_presto_top;
  import presto_pkg::*;
  localparam int NC = 4, NM = 8, BW = 256;
  logic clk = 0, rst_n = 0;
  logic cfg_we, start, flush, ev_valid, ev_ready, running, done;
  logic [31:0] cfg_addr, nrep;
  logic [127:0] cfg_wdata;
  event_t ev;
  logic [63:0] run_cycles;
  iq2_t adc_in [NC];
  iq2_t dac_out [NC];
  logic [3:0] marker, trig_in, trig_sync;
  logic [15:0] bias [16];
  logic [15:0] bias_upd;
  logic sd_rd_valid, sd_rd_ready, sd_resp_valid, sd_wr_valid, sd_wr_ready;
  logic [26:0] sd_rd_line, sd_wr_line;
  logic [127:0] sd_resp_data, sd_wr_data;
  logic signed [47:0] match_res [NM];
  logic [NM-1:0] match_done;
  logic [7:0] fb_mask;
  logic [NM/2-1:0] fb_r;
  logic xfer_busy, err_late, err_overflow, err_store_collision, err_job_overflow;

  presto_top #(.NC(NC), .NM(NM), .TDEPTH(32), .MDEPTH(32), .LUTD(8), .BWORDS(BW), .QDEPTH(64)) dut (.*);

  localparam int LREP = 71, TM = 4, WLEN = 16, TPI = 34, PILEN = 8, NREP = 4;
  int checks = 0, failures = 0;
  int n_played = 0, n_suppressed = 0, n_env = 0, n_loop = 0, n_accum = 0,
      n_overflow = 0, n_late = 0, n_reps = 0, n_fb_lat = 0;

  always #1 clk = ~clk;

  sdram_model #(.LAT(7)) u_sdram (.clk, .rst_n, .stall_en(1'b1), .rd_valid(sd_rd_valid),
    .rd_ready(sd_rd_ready), .rd_line(sd_rd_line), .resp_valid(sd_resp_valid),
    .resp_data(sd_resp_data), .wr_valid(sd_wr_valid), .wr_ready(sd_wr_ready),
    .wr_line(sd_wr_line), .wr_data(sd_wr_data));

  initial begin
    repeat (200000 + 4 * BW) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  function automatic iq2_t resp(input int state, input int c, input int n);
    iq2_t w;
    for (int k = 0; k < 2; k++) begin
      w[k].i = 16'((state != 0 ? 1 : -1) * (2000 + 50 * ((n + k) % 7)) + 100 * c);
      w[k].q = 16'((state != 0 ? -1 : 1) * 1200 + 37 * ((3 * n + k) % 11) - 20 * c);
    end
    return w;
  endfunction

  function automatic iq2_t pi_word(input int a);
    iq2_t w;
    w[0].i = 16'(4000 + 300 * a); w[0].q = 16'(-1000 + 77 * a);
    w[1].i = 16'(4100 + 300 * a); w[1].q = 16'(-900 - 55 * a);
    return w;
  endfunction

  function automatic longint dot(input iq2_t a, input iq2_t b);
    return longint'(a[0].i) * b[0].i + longint'(a[0].q) * b[0].q +
           longint'(a[1].i) * b[1].i + longint'(a[1].q) * b[1].q;
  endfunction

  function automatic iq2_t neg(input iq2_t a);
    iq2_t w;
    for (int k = 0; k < 2; k++) begin w[k].i = -a[k].i; w[k].q = -a[k].q; end
    return w;
  endfunction

  bit run1 = 0;
  always @(negedge clk) begin
    automatic int r = int'(run_cycles / 64'(LREP));
    automatic int n = int'(run_cycles % 64'(LREP));
    for (int c = 0; c < NC; c++) adc_in[c] = run1 ? resp(r % 2, c, n) : resp(1, c, int'(run_cycles));
  end

  // ------------------------------------------------------------ helpers
  task automatic cfg(input logic [31:0] a, input logic [127:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic put(input int t, input opcode_e op, input logic [ARG_W-1:0] arg);
    @(negedge clk);
    ev.time_ = 48'(t); ev.op = op; ev.arg = arg; ev_valid = 1;
    checks++;
    if (!ev_ready) begin failures++; $display("event refused"); end
    @(negedge clk) ev_valid = 0;
  endtask

  // ------------------------------------------------------------ monitors
  int pi_words [NREP];
  int env_words = 0, env_run = 0, env_max = 0;
  always @(negedge clk) if (running && run1) begin
    automatic int r = int'(run_cycles / 64'(LREP));
    automatic int n = int'(run_cycles % 64'(LREP));
    automatic iq2_t o0 = dac_out[0];
    automatic iq2_t o1 = dac_out[1];
    if (o0 != '0 && r < NREP) begin
      // pi pulse words at gain 0.5: floor(x / 2)
      automatic int a = pi_words[r];
      automatic iq2_t e = pi_word(a);
      pi_words[r]++;
      checks++;
      if (o0[0].i != (e[0].i >>> 1) || o0[0].q != (e[0].q >>> 1) ||
          o0[1].i != (e[1].i >>> 1) || o0[1].q != (e[1].q >>> 1)) begin
        failures++; $display("pi word %0d in rep %0d: %h", a, r, o0);
      end
    end
    if (o1 != '0) begin env_words++; env_run++; if (env_run > env_max) env_max = env_run; end
    else env_run = 0;
    if (n == 35) begin
      checks++;
      if (marker[0] !== 1'b1) begin failures++; $display("marker on"); end
    end
    if (n == 52) begin
      checks++;
      if (marker[0] !== 1'b0) begin failures++; $display("marker off"); end
    end
  end

  // mask latency: a changed result reaches the mask three clocks later
  int done_cyc = -100;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [MASK_W-1:0] last_mask = '0;
  always @(negedge clk) begin
    if (match_done[1]) done_cyc = cyc;
    if (fb_mask != last_mask && run1) begin
      checks++;
      if (cyc - done_cyc != 3) begin failures++; $display("mask changed %0d clocks after result", cyc - done_cyc); end
      else n_fb_lat++;
    end
    last_mask = fb_mask;
  end

  // ------------------------------------------------------------ the test
  initial begin
    iq2_t te [WLEN], tg [WLEN];
    longint ne, ng, theta;
    tmpl_arg_t ta; sel_arg_t sa; store_arg_t sta; match_arg_t ma; io_arg_t ia;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; start = 0; flush = 0; nrep = NREP;
    ev_valid = 0; ev = '0; trig_in = '0;
    for (int c = 0; c < NC; c++) adc_in[c] = '0;
    for (int r = 0; r < NREP; r++) pi_words[r] = 0;
    ne = 0; ng = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reference templates: the responses over the matching window
    for (int j = 0; j < WLEN; j++) begin
      te[j] = resp(1, 0, TM + 2 + j);
      tg[j] = resp(0, 0, TM + 2 + j);
      ne += dot(te[j], te[j]);
      ng += dot(tg[j], tg[j]);
      cfg({4'h2, 5'd0, 7'd0, 7'd0, 9'(j)}, 128'(te[j]));
      cfg({4'h2, 5'd0, 7'd1, 7'd0, 9'(j)}, 128'(neg(tg[j])));
    end
    theta = (ne - ng) / 2;
    cfg({4'h3, 5'd0, 7'd0, 16'd0}, 128'({6'd0, 10'(WLEN), 16'd0}));   // unit 0: input 0
    cfg({4'h3, 5'd0, 7'd1, 16'd0}, 128'({6'd0, 10'(WLEN), 16'd0}));   // unit 1: input 0
    cfg({4'h4, 28'd0}, 128'(49'(theta)));                            // pair 0
    cfg({4'h5, 28'd0}, {64'd1, 64'd1});                              // mask bit 0 = R0
    // pi pulse template 0 on output 0, envelope template 8 on output 1
    for (int a = 0; a < PILEN; a++) begin
      cfg({4'h0, 4'd0, 4'd0, 11'd0, 9'(a)}, 128'(pi_word(a)));
      cfg({4'h0, 4'd1, 4'd8, 11'd0, 9'(a)}, 128'(pi_word(a)));
    end
    cfg({4'h0, 4'd0, 4'd0, 1'b1, 19'd0}, 128'(PILEN));
    cfg({4'h0, 4'd1, 4'd8, 1'b1, 19'd0}, 128'(PILEN));
    // tables: gain 0.5 at entry 1 (output 0 both groups, output 1 group 1),
    // frequency 0 and Q offset of a quarter turn at entry 2 of output 1 group 1
    cfg({4'h1, 4'd0, 3'd0, 1'b0, 2'd0, 2'd2, 7'd0, 9'd1}, 128'h8000);
    cfg({4'h1, 4'd0, 3'd0, 1'b1, 2'd0, 2'd2, 7'd0, 9'd1}, 128'h8000);
    cfg({4'h1, 4'd1, 3'd0, 1'b1, 2'd0, 2'd2, 7'd0, 9'd1}, 128'h8000);
    cfg({4'h1, 4'd1, 3'd0, 1'b1, 2'd0, 2'd0, 7'd0, 9'd2}, 128'h0);
    cfg({4'h1, 4'd1, 3'd0, 1'b1, 2'd0, 2'd1, 7'd0, 9'd2}, 128'h40_0000_0000);
    // events, repetition by repetition
    for (int r = 0; r < NREP; r++) begin
      sa = '0; sa.ch_mask = 16'h1; sa.grp_mask = 2'b11; sa.set_gain = 1; sa.gain_idx = 9'd1;
      put(2, OP_SELECT, sa);
      sa = '0; sa.ch_mask = 16'h2; sa.grp_mask = 2'b10; sa.set_gain = 1; sa.gain_idx = 9'd1;
      sa.set_freq = 1; sa.freq_idx = 9'd2; sa.set_phase = 1; sa.phase_idx = 9'd2;
      put(3, OP_SELECT, sa);
      ma = '0; ma.unit_mask = 128'h3;
      put(TM, OP_MATCH, ma);
      sta = '0; sta.ch_mask = 16'h3; sta.len = 29'(WLEN); sta.sdram_line = 27'd100;
      put(TM, OP_STORE, sta);
      ta = '0; ta.ch_mask = 16'h1; ta.tmpl_mask = 16'h1; ta.cond = 1; ta.cond_bit = 3'd0;
      put(TPI, OP_TEMPLATE, ta);
      ia = '0; ia.mark_mask = 4'b1; ia.mark_val = 4'b1;
      put(TPI, OP_MARKER, ia);
      ta = '0; ta.ch_mask = 16'h2; ta.tmpl_mask = 16'h100; ta.envelope = 1; ta.loop = 1;
      put(36, OP_TEMPLATE, ta);
      ia = '0; ia.bias_ch = 4'd3; ia.bias_val = 16'(1000 + r);
      put(40, OP_BIAS, ia);
      ia = '0; ia.mark_mask = 4'b1; ia.mark_val = 4'b0;
      put(50, OP_MARKER, ia);
      ta = '0; ta.ch_mask = 16'h2; ta.tmpl_mask = 16'h100; ta.stop = 1;
      put(56, OP_TEMPLATE, ta);
      put(LREP - 1, OP_END, '0);
    end
    run1 = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    // per repetition: matching results
    for (int r = 0; r < NREP; r++) begin
      automatic longint se = 0, sg = 0;
      wait (match_done[0]);
      for (int j = 0; j < WLEN; j++) begin
        se += dot(te[j], resp(r % 2, 0, TM + 2 + j));
        sg += dot(neg(tg[j]), resp(r % 2, 0, TM + 2 + j));
      end
      @(negedge clk);
      checks++;
      if (longint'(match_res[0]) != se || longint'(match_res[1]) != sg) begin
        failures++; $display("rep %0d match %0d %0d exp %0d %0d", r, match_res[0], match_res[1], se, sg);
      end
      @(negedge clk);
    end
    wait (done);
    n_reps = NREP;
    wait (!xfer_busy && !sd_wr_valid);
    repeat (20) @(negedge clk);
    run1 = 0;
    // pi pulse only in excited repetitions, complete
    for (int r = 0; r < NREP; r++) begin
      checks++;
      if (pi_words[r] != (r % 2 == 1 ? PILEN : 0)) begin
        failures++; $display("rep %0d: %0d pi words", r, pi_words[r]);
      end
      if (r % 2 == 1 && pi_words[r] == PILEN) n_played++;
      if (r % 2 == 0 && pi_words[r] == 0) n_suppressed++;
    end
    // envelope looped for 20 clocks each repetition (20 > template length)
    checks++;
    if (env_max < 2 * PILEN) begin failures++; $display("loop ran %0d", env_max); end
    else n_loop++;
    if (env_words > 0) n_env++;
    checks++;
    if (bias[3] != 16'(1000 + NREP - 1)) begin failures++; $display("bias %0d", bias[3]); end
    // SDRAM holds the sum of all repetitions
    for (int j = 0; j < WLEN; j++) for (int c = 0; c < 2; c++) begin
      automatic logic [127:0] got = u_sdram.peek(27'(100 + 2 * j + c));
      automatic longint ex [4] = '{0, 0, 0, 0};
      for (int r = 0; r < NREP; r++) begin
        automatic iq2_t w = resp(r % 2, c, TM + 2 + j);
        ex[0] += 64'(w[0].i); ex[1] += 64'(w[0].q); ex[2] += 64'(w[1].i); ex[3] += 64'(w[1].q);
      end
      for (int v = 0; v < 4; v++) begin
        checks++;
        if ($signed(got[32*v +: 32]) != 32'(ex[v])) begin
          failures++;
          if (failures < 20) $display("sdram line %0d v%0d: %0d exp %0d", 100 + 2*j + c, v, $signed(got[32*v +: 32]), ex[v]);
        end
      end
    end
    if (u_sdram.writes == 2 * WLEN * NREP) n_accum++;
    checks++;
    if (err_overflow || err_late || err_store_collision || err_job_overflow) begin
      failures++; $display("unexpected error flag");
    end
    // ---- run 2: overflow and a late event
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    nrep = 1;
    sta = '0; sta.ch_mask = 16'((1 << NC) - 1); sta.len = 29'(BW / NC + 8); sta.sdram_line = 27'd5000;
    put(5, OP_STORE, sta);
    ia = '0; ia.bias_ch = 4'd1; ia.bias_val = 16'd7;
    put(50, OP_BIAS, ia);
    ia = '0; ia.mark_mask = 4'b10; ia.mark_val = 4'b10;
    put(20, OP_MARKER, ia);         // queued behind t=50: executes late
    put(BW / NC + 40, OP_END, '0);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (!err_overflow) begin failures++; $display("no overflow"); end else n_overflow++;
    checks++;
    if (!err_late || marker[1] !== 1'b1) begin failures++; $display("no late event"); end else n_late++;
    // every mechanism must have happened
    $display("mechanisms: played=%0d suppressed=%0d envelope=%0d loop=%0d accumulate=%0d overflow=%0d late=%0d reps=%0d mask_latency=%0d",
             n_played, n_suppressed, n_env, n_loop, n_accum, n_overflow, n_late, n_reps, n_fb_lat);
    if (n_played == 0)     begin failures++; $display("conditional pulse never played"); end
    if (n_suppressed == 0) begin failures++; $display("conditional pulse never suppressed"); end
    if (n_env == 0)        begin failures++; $display("no envelope playback"); end
    if (n_loop == 0)       begin failures++; $display("no loop"); end
    if (n_accum == 0)      begin failures++; $display("no accumulation"); end
    if (n_overflow == 0)   begin failures++; $display("no overflow"); end
    if (n_late == 0)       begin failures++; $display("no late event"); end
    if (n_fb_lat == 0)     begin failures++; $display("mask never changed"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
