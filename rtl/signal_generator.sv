// signal_generator: the pulse synthesizer of one output channel.
//
// Sixteen template players form two groups of eight. Each group owns a
// carrier generator and a scaler. A playing template is either passed on raw
// or, when started as an envelope, multiplied by its group's carrier
// (complex product, result scaled by 2**-15). The eight template outputs of a
// group are summed, multiplied by the group's signed 17-bit gain (16
// fraction bits: -1 up to 1-2**-16), and the two scaled group outputs are
// summed and saturated to 16 bits. This is the structure of the paper's signal-generator figure.
//
// Each group has three 512-entry look-up tables, written before the run:
// carrier frequency (40 bits), carrier phase (40-bit I offset and 40-bit Q
// offset) and gain (17 bits). A select command from the sequencer loads the
// chosen entries into the group's working registers; they apply from the
// next clock on (the carrier output follows 19 clocks later).
//
// Timing: start command at edge t -> template word at the player output after
// t+1 -> channel output after t+5 (product, group sum, scale and final sum
// are registered), raw or envelope alike. One word (two IQ pairs) per clock.
// From the paper: 16 templates in two groups of 8, one carrier and one
// scaler per group, 512-entry tables, 40-bit carrier words, 17-bit gain.
// This design's choice: fixed-point scalings, saturation, table write port,
// working registers cleared to zero at reset (silent until selected).
module signal_generator
  import presto_pkg::*;
#(
  parameter int unsigned DEPTH = TEMPL_WORDS,
  parameter int unsigned LUTD  = LUT_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       run_clr,      // restart carriers
  // template memory writes
  input  logic                       tw_en,
  input  logic [3:0]                 tw_tmpl,
  input  logic [$clog2(DEPTH)-1:0]   tw_addr,
  input  iq2_t                       tw_data,
  input  logic                       tl_we,        // template length write
  input  logic [$clog2(DEPTH+1)-1:0] tl_data,
  // look-up table writes: sel 0 = frequency, 1 = phase {I,Q}, 2 = gain
  input  logic                       lw_en,
  input  logic                       lw_grp,
  input  logic [1:0]                 lw_sel,
  input  logic [$clog2(LUTD)-1:0]    lw_idx,
  input  logic [2*PHASE_W-1:0]       lw_data,
  // sequencer commands
  input  logic                       tcmd_valid,
  input  tmpl_arg_t                  tcmd,
  input  logic                       scmd_valid,
  input  sel_arg_t                   scmd,
  input  logic [MASK_W-1:0]          fb_mask,
  // output to the DAC chain
  output iq2_t                       dout
);
  localparam int unsigned TPG = NTEMPL / NGROUP;   // templates per group
  localparam int unsigned LW  = $clog2(LUTD);

  iq2_t tout  [NTEMPL];
  logic tenv  [NTEMPL];
  iq2_t carr  [NGROUP];
  iq2_t prod  [NTEMPL];
  logic signed [19:0] gsum_i [NGROUP][SPC];
  logic signed [19:0] gsum_q [NGROUP][SPC];
  logic signed [20:0] scl_i  [NGROUP][SPC];
  logic signed [20:0] scl_q  [NGROUP][SPC];

  // ------------------------------------------------------------ templates
  for (genvar t = 0; t < NTEMPL; t++) begin : g_t
    logic busy_unused;
    template_player #(.DEPTH(DEPTH)) u_tp (
      .clk, .rst_n,
      .wr_en(tw_en && tw_tmpl == 4'(t)), .wr_addr(tw_addr), .wr_data(tw_data),
      .len_we(tl_we && tw_tmpl == 4'(t)), .len_data(tl_data),
      .start(tcmd_valid && tcmd.tmpl_mask[t] && !tcmd.stop),
      .stop (tcmd_valid && tcmd.tmpl_mask[t] &&  tcmd.stop),
      .loop(tcmd.loop), .envelope(tcmd.envelope), .cond(tcmd.cond),
      .cond_bit(tcmd.cond_bit), .fb_mask,
      .dout(tout[t]), .env_o(tenv[t]), .busy(busy_unused));

    // raw or envelope times carrier, one register
    always_ff @(posedge clk) begin
      for (int k = 0; k < SPC; k++) begin
        if (tenv[t]) begin
          prod[t][k].i <= sat16(32'((32'(tout[t][k].i) * 32'(carr[t/TPG][k].i)
                                  - 32'(tout[t][k].q) * 32'(carr[t/TPG][k].q)) >>> 15));
          prod[t][k].q <= sat16(32'((32'(tout[t][k].i) * 32'(carr[t/TPG][k].q)
                                  + 32'(tout[t][k].q) * 32'(carr[t/TPG][k].i)) >>> 15));
        end else begin
          prod[t][k] <= tout[t][k];
        end
      end
    end
  end

  // ------------------------------------------------------------ groups
  for (genvar g = 0; g < NGROUP; g++) begin : g_g
    logic [FREQ_W-1:0]    lut_f [LUTD];
    logic [2*PHASE_W-1:0] lut_p [LUTD];
    logic [GAIN_W-1:0]    lut_g [LUTD];
    logic [FREQ_W-1:0]    cur_f;
    logic [2*PHASE_W-1:0] cur_p;
    logic signed [GAIN_W-1:0] cur_g;

    always_ff @(posedge clk) begin
      if (lw_en && lw_grp == 1'(g) && lw_sel == 2'd0) lut_f[lw_idx] <= lw_data[FREQ_W-1:0];
      if (lw_en && lw_grp == 1'(g) && lw_sel == 2'd1) lut_p[lw_idx] <= lw_data;
      if (lw_en && lw_grp == 1'(g) && lw_sel == 2'd2) lut_g[lw_idx] <= lw_data[GAIN_W-1:0];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cur_f <= '0; cur_p <= '0; cur_g <= '0;
      end else if (scmd_valid && scmd.grp_mask[g]) begin
        if (scmd.set_freq)  cur_f <= lut_f[LW'(scmd.freq_idx)];
        if (scmd.set_phase) cur_p <= lut_p[LW'(scmd.phase_idx)];
        if (scmd.set_gain)  cur_g <= lut_g[LW'(scmd.gain_idx)];
      end
    end

    carrier_gen u_cg (.clk, .rst_n, .clr(run_clr), .freq(cur_f),
                      .phase_i(cur_p[2*PHASE_W-1:PHASE_W]), .phase_q(cur_p[PHASE_W-1:0]),
                      .carrier(carr[g]));

    always_ff @(posedge clk) begin
      for (int k = 0; k < SPC; k++) begin
        logic signed [19:0] si, sq;
        si = '0; sq = '0;
        for (int t = 0; t < TPG; t++) begin
          si += 20'(prod[g*TPG+t][k].i);
          sq += 20'(prod[g*TPG+t][k].q);
        end
        gsum_i[g][k] <= si;
        gsum_q[g][k] <= sq;
        scl_i[g][k]  <= 21'((40'(gsum_i[g][k]) * 40'(cur_g)) >>> 16);
        scl_q[g][k]  <= 21'((40'(gsum_q[g][k]) * 40'(cur_g)) >>> 16);
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      dout[k].i <= sat16(32'(scl_i[0][k]) + 32'(scl_i[1][k]));
      dout[k].q <= sat16(32'(scl_q[0][k]) + 32'(scl_q[1][k]));
    end
  end
endmodule
