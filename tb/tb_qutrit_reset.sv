// tb_qutrit_reset: the active qutrit reset workload on the whole design.
//
// A reduced-size top (2 channels, 8 matching units, 32-word templates) is
// set up as in the qutrit-reset procedure: matching pairs (tau_e, -tau_g),
// (tau_f, -tau_e) and (tau_g, -tau_f) on input 0 with thresholds
// theta_ij = (|tau_i|^2 - |tau_j|^2)/2, and a feedback operator with
//   mask bit 0 = R_eg & !R_fe   (enables pi_eg, template 0 of output 0)
//   mask bit 1 = R_fe & !R_gf   (enables pi_fg, template 1 of output 0)
// Both pulses are scheduled as conditional starts right after the readout
// window. The input plays the ground, first- and second-excited response in
// turn over six repetitions; the pulses play at gain 0.5 (three points 120 degrees apart in the IQ plane,
// with a slow ripple). Each repetition checks that exactly the right pulse
// (or none, for the ground state) reaches output 0, sample by sample, and the
// bench counts how often each of the three outcomes happened.
module tb_qutrit_reset;
  import presto_pkg::*;
  localparam int NC = 2, NM = 8, BW = 256;
  localparam int LREP = 60, TM = 4, WLEN = 16, TPI = 32, PILEN = 6, NREP = 6;
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
  int checks = 0, failures = 0;
  int n_none = 0, n_eg = 0, n_fg = 0;

  presto_top #(.NC(NC), .NM(NM), .TDEPTH(32), .MDEPTH(32), .LUTD(8), .BWORDS(BW), .QDEPTH(64)) dut (.*);

  always #1 clk = ~clk;

  // nothing is stored: the SDRAM port stays idle
  assign sd_rd_ready = 1'b1;
  assign sd_resp_valid = 1'b0;
  assign sd_resp_data = '0;
  assign sd_wr_ready = 1'b1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // state 0 = g, 1 = e, 2 = f: amplitude 3000 at 0, 120 and 240 degrees
  function automatic iq2_t resp(input int state, input int n);
    iq2_t w;
    int ci [3] = '{3000, -1500, -1500};
    int cq [3] = '{0, 2598, -2598};
    for (int k = 0; k < 2; k++) begin
      w[k].i = 16'(ci[state] + 40 * ((n + k) % 5));
      w[k].q = 16'(cq[state] - 30 * ((2 * n + k) % 7));
    end
    return w;
  endfunction

  // pulse p (0 = pi_eg, 1 = pi_fg), word a
  function automatic iq2_t pi_word(input int p, input int a);
    iq2_t w;
    w[0].i = 16'(2000 + 1000 * p + 100 * a); w[0].q = 16'(500 - 50 * a);
    w[1].i = 16'(2050 + 1000 * p + 100 * a); w[1].q = 16'(-500 * p + 20 * a);
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

  always @(negedge clk) begin
    automatic int r = int'(run_cycles / 64'(LREP));
    automatic int n = int'(run_cycles % 64'(LREP));
    adc_in[0] = resp(r % 3, n);
    adc_in[1] = '0;
  end

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

  // output monitor: which pulse, how many words, all words right
  int seen [NREP][2];
  bit run1 = 0;
  always @(negedge clk) if (running && run1) begin
    automatic int r = int'(run_cycles / 64'(LREP));
    automatic iq2_t o = dac_out[0];
    if (o != '0 && r < NREP) begin
      automatic int p = (o[0].i >= 16'sd1400) ? 1 : 0;   // pulse 1 words start at 3000/2
      automatic int a = seen[r][p];
      automatic iq2_t e = pi_word(p, a);
      seen[r][p]++;
      checks++;
      if (o[0].i != (e[0].i >>> 1) || o[0].q != (e[0].q >>> 1) ||
          o[1].i != (e[1].i >>> 1) || o[1].q != (e[1].q >>> 1)) begin
        failures++; $display("rep %0d pulse %0d word %0d: %h exp %h", r, p, a, o, e);
      end
    end
  end

  initial begin
    iq2_t tmpl [3][WLEN];
    longint nrm [3];
    tmpl_arg_t ta; sel_arg_t sa; match_arg_t ma;
    // pair p holds (tau_i, -tau_j): (e,g), (f,e), (g,f)
    int pi_ [3] = '{1, 2, 0};
    int pj_ [3] = '{0, 1, 2};
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; start = 0; flush = 0; nrep = NREP;
    ev_valid = 0; ev = '0; trig_in = '0;
    for (int r = 0; r < NREP; r++) begin seen[r][0] = 0; seen[r][1] = 0; end
    for (int s = 0; s < 3; s++) nrm[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++)
      for (int j = 0; j < WLEN; j++) begin
        tmpl[s][j] = resp(s, TM + 2 + j);
        nrm[s] += dot(tmpl[s][j], tmpl[s][j]);
      end
    for (int p = 0; p < 3; p++) begin
      for (int j = 0; j < WLEN; j++) begin
        cfg({4'h2, 5'd0, 7'(2 * p), 7'd0, 9'(j)}, 128'(tmpl[pi_[p]][j]));
        cfg({4'h2, 5'd0, 7'(2 * p + 1), 7'd0, 9'(j)}, 128'(neg(tmpl[pj_[p]][j])));
      end
      cfg({4'h3, 5'd0, 7'(2 * p), 16'd0}, 128'({6'd0, 10'(WLEN), 16'd0}));
      cfg({4'h3, 5'd0, 7'(2 * p + 1), 16'd0}, 128'({6'd0, 10'(WLEN), 16'd0}));
      cfg({4'h4, 22'd0, 6'(p)}, 128'(49'((nrm[pi_[p]] - nrm[pj_[p]]) / 2)));
    end
    // r[0] = R_eg, r[1] = R_fe, r[2] = R_gf
    cfg({4'h5, 25'd0, 3'd0}, {64'b001, 64'b011});   // R_eg & !R_fe
    cfg({4'h5, 25'd0, 3'd1}, {64'b010, 64'b110});   // R_fe & !R_gf
    for (int p = 0; p < 2; p++) begin
      for (int a = 0; a < PILEN; a++) cfg({4'h0, 4'd0, 4'(p), 11'd0, 9'(a)}, 128'(pi_word(p, a)));
      cfg({4'h0, 4'd0, 4'(p), 1'b1, 19'd0}, 128'(PILEN));
    end
    cfg({4'h1, 4'd0, 3'd0, 1'b0, 2'd0, 2'd2, 7'd0, 9'd1}, 128'h8000);   // gain 0.5
    for (int r = 0; r < NREP; r++) begin
      sa = '0; sa.ch_mask = 16'h1; sa.grp_mask = 2'b01; sa.set_gain = 1; sa.gain_idx = 9'd1;
      put(2, OP_SELECT, sa);
      ma = '0; ma.unit_mask = 128'h3f;
      put(TM, OP_MATCH, ma);
      ta = '0; ta.ch_mask = 16'h1; ta.tmpl_mask = 16'h1; ta.cond = 1; ta.cond_bit = 3'd0;
      put(TPI, OP_TEMPLATE, ta);
      ta.tmpl_mask = 16'h2; ta.cond_bit = 3'd1;
      put(TPI, OP_TEMPLATE, ta);
      put(LREP - 1, OP_END, '0);
    end
    run1 = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    repeat (5) @(negedge clk);
    for (int r = 0; r < NREP; r++) begin
      automatic int st = r % 3;
      checks++;
      if (seen[r][0] != (st == 1 ? PILEN : 0) || seen[r][1] != (st == 2 ? PILEN : 0)) begin
        failures++; $display("rep %0d state %0d: pi_eg %0d words, pi_fg %0d words", r, st, seen[r][0], seen[r][1]);
      end else if (st == 0) n_none++;
      else if (st == 1) n_eg++;
      else n_fg++;
    end
    checks += 3;
    $display("outcomes: none=%0d pi_eg=%0d pi_fg=%0d", n_none, n_eg, n_fg);
    if (n_none == 0) begin failures++; $display("ground state never left alone"); end
    if (n_eg == 0)   begin failures++; $display("pi_eg never played"); end
    if (n_fg == 0)   begin failures++; $display("pi_fg never played"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
