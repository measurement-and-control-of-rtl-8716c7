// tb_signal_generator: checks one output channel end to end.
//
// Templates are written with known words, the look-up tables with gains of
// +0.5 and -0.5 and a carrier of frequency 0 whose I offset is 0 and Q
// offset a quarter turn (carrier = 32767*(1 + j)). Templates are then
// started raw, as envelopes, superimposed, across both groups, looped and
// gated by the feedback mask. An independent model in this bench predicts
// every output word from the start times, using the channel's five-clock
// latency (start edge + 5); raw words must match exactly, envelope words to
// within 3 LSB (carrier rounding).
module tb_signal_generator;
  import presto_pkg::*;
  localparam int D = 16, LD = 8, LEN = 8;
  logic clk = 0, rst_n = 0, run_clr = 0;
  logic tw_en = 0, tl_we = 0, lw_en = 0, lw_grp = 0;
  logic [3:0] tw_tmpl = 0, tw_addr = 0;
  iq2_t tw_data = '0, dout;
  logic [4:0] tl_data = 0;
  logic [1:0] lw_sel = 0;
  logic [2:0] lw_idx = 0;
  logic [79:0] lw_data = 0;
  logic tcmd_valid = 0, scmd_valid = 0;
  tmpl_arg_t tcmd = '0;
  sel_arg_t  scmd = '0;
  logic [7:0] fb_mask = 0;
  int checks = 0, failures = 0, cyc = 0;

  signal_generator #(.DEPTH(D), .LUTD(LD)) dut (.*);
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic iq2_t word(input int t, input int a);
    iq2_t w;
    w[0].i = 16'(1000 * (t + 1) + 37 * a);  w[0].q = 16'(-500 * t + 11 * a);
    w[1].i = 16'(-2000 + 300 * a - t);      w[1].q = 16'(70 * a * t);
    return w;
  endfunction

  // ---- reference model
  int st_t[$], st_s[$], st_env[$], st_loop[$];   // template, start edge, flags
  int stop_edge[NTEMPL];
  int gain[2];

  function automatic int div_floor(input longint a, input longint b);
    longint q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q--;
    return int'(q);
  endfunction

  function automatic int sat(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic expected(input int n, output int ei[2], output int eq[2], output bit env_used);
    int gi[2][2], gq[2][2];
    env_used = 0;
    for (int g = 0; g < 2; g++) for (int k = 0; k < 2; k++) begin gi[g][k] = 0; gq[g][k] = 0; end
    for (int e = 0; e < st_t.size(); e++) begin
      int a = n - st_s[e] - 5;
      int t = st_t[e];
      bit live = (a >= 0) && (st_loop[e] != 0 || a < LEN) && (n - 5 < stop_edge[t] || stop_edge[t] <= st_s[e]);
      // a later start of the same template replaces this one
      for (int f = e + 1; f < st_t.size(); f++) if (st_t[f] == t && n - 5 >= st_s[f]) live = 0;
      if (live) begin
        iq2_t w = word(t, a % LEN);
        for (int k = 0; k < 2; k++) begin
          int pi, pq;
          if (st_env[e] != 0) begin
            env_used = 1;
            pi = sat(div_floor(longint'(w[k].i) * 32767 - longint'(w[k].q) * 32767, 32768));
            pq = sat(div_floor(longint'(w[k].i) * 32767 + longint'(w[k].q) * 32767, 32768));
          end else begin
            pi = w[k].i; pq = w[k].q;
          end
          gi[t/8][k] += pi; gq[t/8][k] += pq;
        end
      end
    end
    for (int k = 0; k < 2; k++) begin
      ei[k] = sat(div_floor(longint'(gi[0][k]) * gain[0], 65536) + div_floor(longint'(gi[1][k]) * gain[1], 65536));
      eq[k] = sat(div_floor(longint'(gq[0][k]) * gain[0], 65536) + div_floor(longint'(gq[1][k]) * gain[1], 65536));
    end
  endtask

  bit monitor_on = 0;
  always @(negedge clk) if (monitor_on) begin
    int ei[2], eq[2];
    bit env_used;
    expected(cyc, ei, eq, env_used);
    for (int k = 0; k < 2; k++) begin
      automatic int tol = env_used ? 3 : 0;
      automatic int gi = int'(dout[k].i);
      automatic int gq = int'(dout[k].q);
      checks++;
      if (gi - ei[k] > tol || ei[k] - gi > tol || gq - eq[k] > tol || eq[k] - gq > tol) begin
        failures++;
        if (failures < 40) $display("cyc %0d k %0d got %0d,%0d exp %0d,%0d", cyc, k, gi, gq, ei[k], eq[k]);
      end
    end
  end

  task automatic start_tmpl(input logic [15:0] m, input bit env, input bit lp, input bit cd, input int cb, input bit stp);
    @(negedge clk);
    tcmd = '0; tcmd.tmpl_mask = m; tcmd.envelope = env; tcmd.loop = lp; tcmd.cond = cd;
    tcmd.cond_bit = 3'(cb); tcmd.stop = stp; tcmd_valid = 1;
    @(posedge clk);
    for (int t = 0; t < NTEMPL; t++) if (m[t]) begin
      if (stp) stop_edge[t] = cyc + 1;
      else if (!cd || fb_mask[cb]) begin
        st_t.push_back(t); st_s.push_back(cyc + 1); st_env.push_back(env); st_loop.push_back(lp);
        stop_edge[t] = -1;
      end
    end
    @(negedge clk) tcmd_valid = 0;
  endtask

  task automatic lut(input int g, input int sel, input int idx, input logic [79:0] d);
    @(negedge clk); lw_en = 1; lw_grp = 1'(g); lw_sel = 2'(sel); lw_idx = 3'(idx); lw_data = d;
    @(negedge clk); lw_en = 0;
  endtask

  initial begin
    for (int t = 0; t < NTEMPL; t++) stop_edge[t] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NTEMPL; t++) begin
      for (int a = 0; a < LEN; a++) begin
        @(negedge clk); tw_en = 1; tw_tmpl = 4'(t); tw_addr = 4'(a); tw_data = word(t, a);
      end
      @(negedge clk); tw_en = 0; tl_we = 1; tl_data = 5'(LEN);
      @(negedge clk); tl_we = 0;
    end
    lut(0, 2, 1, 80'h08000);            // +0.5
    lut(1, 2, 2, 80'h18000);            // -0.5
    lut(1, 0, 0, 80'h0);                // frequency 0
    lut(1, 1, 3, {40'h0, 40'h40_0000_0000});   // I offset 0, Q offset quarter turn
    @(negedge clk);
    scmd = '0; scmd.grp_mask = 2'b01; scmd.set_gain = 1; scmd.gain_idx = 9'd1; scmd_valid = 1;
    @(negedge clk);
    scmd = '0; scmd.grp_mask = 2'b10; scmd.set_gain = 1; scmd.gain_idx = 9'd2;
    scmd.set_freq = 1; scmd.freq_idx = 0; scmd.set_phase = 1; scmd.phase_idx = 9'd3; scmd_valid = 1;
    @(negedge clk); scmd_valid = 0;
    gain[0] = 32768; gain[1] = -32768;
    repeat (30) @(negedge clk);          // carrier pipeline settles
    monitor_on = 1;
    repeat (4) @(negedge clk);
    start_tmpl(16'h0001, 0, 0, 0, 0, 0);            // raw, group 0
    repeat (15) @(negedge clk);
    start_tmpl(16'h0103, 0, 0, 0, 0, 0);            // superimposed, both groups
    start_tmpl(16'h0200, 1, 0, 0, 0, 0);            // envelope in group 1
    repeat (15) @(negedge clk);
    start_tmpl(16'h0004, 0, 1, 0, 0, 0);            // looping
    repeat (20) @(negedge clk);
    start_tmpl(16'h0004, 0, 0, 0, 0, 1);            // stop it
    repeat (10) @(negedge clk);
    fb_mask = 8'b0000_0100;
    start_tmpl(16'h0010, 0, 0, 1, 1, 0);            // gated by bit 1 = 0: silent
    start_tmpl(16'h0020, 0, 0, 1, 2, 0);            // gated by bit 2 = 1: plays
    repeat (20) @(negedge clk);
    monitor_on = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
