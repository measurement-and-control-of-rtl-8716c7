// tb_freq_sweep: a carrier-frequency sweep with interleaved averaging.
//
// This is the pattern of the spectroscopy and gate tune-up experiments: the
// sequencer steps a parameter from repetition to repetition and every point
// is averaged in SDRAM. A reduced-size top (2 channels, 16-word templates,
// 8-entry tables, 256-word buffer) plays an envelope template on output 0
// at gain 0.5, with the group-0 carrier frequency taken from table entry
// r mod K in repetition r. Output 0 is looped back to input 0, and a store
// window records it into SDRAM at line BASE + (r mod K) * SLEN, so the N
// repetitions of each of the K points add up in their own block of lines
// (interleaved averaging: the points alternate, the sums do not mix).
// The bench records what the input saw and checks every SDRAM value against
// its own sums. It also counts how many points differ from point 0 (the
// frequency step worked) and that each block received N windows.
module tb_freq_sweep;
  import presto_pkg::*;
  localparam int NC = 2, NM = 4, BW = 256;
  localparam int K = 4, N = 3, NREP = K * N, LREP = 48, SLEN = 20, BASE = 1000;
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

  presto_top #(.NC(NC), .NM(NM), .TDEPTH(16), .MDEPTH(16), .LUTD(8), .BWORDS(BW), .QDEPTH(64)) dut (.*);

  sdram_model #(.LAT(4)) u_sdram (.clk, .rst_n, .stall_en(1'b1), .rd_valid(sd_rd_valid),
    .rd_ready(sd_rd_ready), .rd_line(sd_rd_line), .resp_valid(sd_resp_valid),
    .resp_data(sd_resp_data), .wr_valid(sd_wr_valid), .wr_ready(sd_wr_ready),
    .wr_line(sd_wr_line), .wr_data(sd_wr_data));

  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // loopback and record of the input, per repetition and sequence time
  iq2_t rec [NREP][LREP];
  bit run1 = 0;
  always @(negedge clk) begin
    automatic int r = int'(run_cycles / 64'(LREP));
    automatic int n = int'(run_cycles % 64'(LREP));
    adc_in[0] = dac_out[0];
    adc_in[1] = '0;
    if (run1 && running && r < NREP) rec[r][n] = dac_out[0];
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

  initial begin
    tmpl_arg_t ta; sel_arg_t sa; store_arg_t sta;
    int n_diff, n_nonzero;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; start = 0; flush = 0; nrep = NREP;
    ev_valid = 0; ev = '0; trig_in = '0;
    n_diff = 0; n_nonzero = 0;
    for (int r = 0; r < NREP; r++) for (int n = 0; n < LREP; n++) rec[r][n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // envelope: 12 words of constant amplitude 12000 along I
    for (int a = 0; a < 12; a++) cfg({4'h0, 4'd0, 4'd0, 11'd0, 9'(a)}, {96'd0, 16'd12000, 16'd0, 16'd12000, 16'd0});
    cfg({4'h0, 4'd0, 4'd0, 1'b1, 19'd0}, 128'd12);
    // frequencies: K different steps per sample (fractions of a turn)
    for (int k = 0; k < K; k++)
      cfg({4'h1, 4'd0, 3'd0, 1'b0, 2'd0, 2'd0, 7'd0, 9'(k)}, 128'(40'h10_0000_0000 + 40'(k) * 40'h08_0000_0000));
    cfg({4'h1, 4'd0, 3'd0, 1'b0, 2'd0, 2'd2, 7'd0, 9'd1}, 128'h8000);   // gain 0.5
    for (int r = 0; r < NREP; r++) begin
      sa = '0; sa.ch_mask = 16'h1; sa.grp_mask = 2'b01; sa.set_gain = 1; sa.gain_idx = 9'd1;
      sa.set_freq = 1; sa.freq_idx = 9'(r % K);
      put(1, OP_SELECT, sa);
      ta = '0; ta.ch_mask = 16'h1; ta.tmpl_mask = 16'h1; ta.envelope = 1;
      put(24, OP_TEMPLATE, ta);
      sta = '0; sta.ch_mask = 16'h1; sta.len = 29'(SLEN); sta.sdram_line = 27'(BASE + (r % K) * SLEN);
      put(24, OP_STORE, sta);
      put(LREP - 1, OP_END, '0);
    end
    run1 = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    repeat (10) @(negedge clk);
    wait (!xfer_busy && !sd_wr_valid);
    repeat (10) @(negedge clk);
    // every SDRAM value is the sum of its point's N windows
    for (int k = 0; k < K; k++)
      for (int j = 0; j < SLEN; j++) begin
        automatic logic [127:0] got = u_sdram.peek(27'(BASE + k * SLEN + j));
        automatic logic [127:0] g0 = u_sdram.peek(27'(BASE + j));
        automatic longint ex [4] = '{0, 0, 0, 0};
        for (int r = k; r < NREP; r += K) begin
          automatic iq2_t w = rec[r][24 + 2 + j];
          ex[0] += 64'(w[0].i); ex[1] += 64'(w[0].q); ex[2] += 64'(w[1].i); ex[3] += 64'(w[1].q);
        end
        for (int v = 0; v < 4; v++) begin
          checks++;
          if ($signed(got[32*v +: 32]) != 32'(ex[v])) begin
            failures++;
            if (failures < 10) $display("point %0d word %0d v%0d: %0d exp %0d", k, j, v, $signed(got[32*v +: 32]), ex[v]);
          end
        end
        if (got != '0) n_nonzero++;
        if (k > 0 && got != g0) n_diff++;
      end
    checks += 3;
    if (u_sdram.writes != NREP * SLEN) begin failures++; $display("%0d SDRAM writes, expected %0d", u_sdram.writes, NREP * SLEN); end
    if (n_nonzero < K * 8) begin failures++; $display("only %0d non-zero lines", n_nonzero); end
    if (n_diff == 0) begin failures++; $display("frequency step changed nothing"); end
    $display("sweep: %0d points x %0d averages, %0d non-zero lines, %0d lines differ from point 0", K, N, n_nonzero, n_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
