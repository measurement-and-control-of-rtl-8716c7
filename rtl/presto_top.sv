// presto_top: pulsed-mode measurement and control firmware.
//
// The design sits between the RF data converters and the processor of a
// radio-frequency system on chip. It generates pulses on NCH output streams
// and analyses NCH input streams, all at two complex samples per 500 MHz
// clock (1 GS/s), under the control of a timed event sequencer:
//
//   processor --events--> event_sequencer --commands--> generators, store,
//                                                       matching, markers, bias
//   signal_generator x NCH  ------------------------------------> dac_out
//   adc_in --> store_ctrl + sample_buffer --> transfer_accum ---> SDRAM port
//   adc_in --> match_unit x NM --> feedback_unit --mask--> signal_generator
//
// Configuration (templates, tables, matching set-up, thresholds, feedback
// operator) is written before a run over one write port; cfg_addr[31:28]
// selects the target:
//   0 output template  ch=[27:24] tmpl=[23:20] word=[8:0]; [19]=1 writes the
//                      template length (words) from cfg_wdata instead
//   1 generator table  ch=[27:24] group=[20] table=[17:16] (0 freq, 1 phase
//                      {I offset, Q offset}, 2 gain) entry=[8:0]
//   2 match template   unit=[22:16] word=[8:0]
//   3 match set-up     unit=[22:16]; input channel = wdata[3:0],
//                      length in words = wdata[25:16]
//   4 threshold        pair=[5:0]; theta = wdata[48:0]
//   5 feedback operator mask bit=[2:0]; care = wdata[63:0], value = wdata[127:64]
// Waveform words are two IQ pairs: sample 0 in bits [31:0] (I in [31:16],
// Q in [15:0]), sample 1 in bits [63:32].
//
// The processor, the RF converters with their digital mixers and NCOs, the
// SDRAM and the analog boards are outside; their signals are ports here.
// Parameters default to the paper's sizes: 16 channels, 16 templates of 1022
// IQ pairs per output, 512-entry tables, 128 matching units, 2**19-pair store
// buffer.
module presto_top
  import presto_pkg::*;
#(
  parameter int unsigned NC     = NCH,
  parameter int unsigned NM     = NMATCH,
  parameter int unsigned TDEPTH = TEMPL_WORDS,
  parameter int unsigned MDEPTH = TEMPL_WORDS,
  parameter int unsigned LUTD   = LUT_DEPTH,
  parameter int unsigned BWORDS = 2**18,
  parameter int unsigned QDEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration writes
  input  logic                     cfg_we,
  input  logic [31:0]              cfg_addr,
  input  logic [127:0]             cfg_wdata,
  // sequencer control and event upload
  input  logic                     start,
  input  logic                     flush,
  input  logic [31:0]              nrep,
  input  logic                     ev_valid,
  output logic                     ev_ready,
  input  event_t                   ev,
  output logic                     running,
  output logic                     done,
  output logic [RUN_W-1:0]         run_cycles,
  // converters
  input  iq2_t                     adc_in  [NC],
  output iq2_t                     dac_out [NC],
  // digital I/O and DC bias
  output logic [NMARK-1:0]         marker,
  input  logic [NTRIG-1:0]         trig_in,
  output logic [NTRIG-1:0]         trig_sync,
  output logic [15:0]              bias [NBIAS],
  output logic [NBIAS-1:0]         bias_upd,
  // SDRAM
  output logic                     sd_rd_valid,
  input  logic                     sd_rd_ready,
  output logic [SDRAM_LINE_AW-1:0] sd_rd_line,
  input  logic                     sd_resp_valid,
  input  logic [127:0]             sd_resp_data,
  output logic                     sd_wr_valid,
  input  logic                     sd_wr_ready,
  output logic [SDRAM_LINE_AW-1:0] sd_wr_line,
  output logic [127:0]             sd_wr_data,
  // results and status
  output logic signed [MATCH_W-1:0] match_res [NM],
  output logic [NM-1:0]            match_done,
  output logic [MASK_W-1:0]        fb_mask,
  output logic [NM/2-1:0]          fb_r,
  output logic                     xfer_busy,
  output logic                     err_late,
  output logic                     err_overflow,
  output logic                     err_store_collision,
  output logic                     err_job_overflow
);
  localparam int unsigned BAW = $clog2(BWORDS);
  localparam int unsigned TAW = $clog2(TDEPTH);
  localparam int unsigned MAW = $clog2(MDEPTH);
  localparam int unsigned NCW = (NC > 1) ? $clog2(NC) : 1;

  logic [3:0] region;
  assign region = cfg_addr[31:28];

  // ------------------------------------------------------------ sequencer
  logic       run_clr, tmpl_valid, sel_valid, store_valid, match_valid;
  tmpl_arg_t  tmpl_cmd;
  sel_arg_t   sel_cmd;
  store_arg_t store_cmd;
  match_arg_t match_cmd;
  logic [TIME_W-1:0] now_unused;
  logic [31:0]       rep_unused;

  event_sequencer #(.QDEPTH(QDEPTH)) u_seq (
    .clk, .rst_n, .start, .flush, .nrep, .running, .done, .late(err_late),
    .now(now_unused), .run_cycles, .rep_count(rep_unused),
    .ev_valid, .ev_ready, .ev, .run_clr,
    .tmpl_valid, .tmpl_cmd, .sel_valid, .sel_cmd, .store_valid, .store_cmd,
    .match_valid, .match_cmd, .marker, .bias, .bias_upd, .trig_in, .trig_sync);

  // ------------------------------------------------------------ outputs
  for (genvar c = 0; c < NC; c++) begin : g_out
    signal_generator #(.DEPTH(TDEPTH), .LUTD(LUTD)) u_gen (
      .clk, .rst_n, .run_clr,
      .tw_en(cfg_we && region == CFG_OUT_TEMPL && cfg_addr[27:24] == 4'(c) && !cfg_addr[19]),
      .tw_tmpl(cfg_addr[23:20]), .tw_addr(TAW'(cfg_addr[8:0])), .tw_data(iq2_t'(cfg_wdata[63:0])),
      .tl_we(cfg_we && region == CFG_OUT_TEMPL && cfg_addr[27:24] == 4'(c) && cfg_addr[19]),
      .tl_data(($clog2(TDEPTH+1))'(cfg_wdata[9:0])),
      .lw_en(cfg_we && region == CFG_GEN_LUT && cfg_addr[27:24] == 4'(c)),
      .lw_grp(cfg_addr[20]), .lw_sel(cfg_addr[17:16]),
      .lw_idx(($clog2(LUTD))'(cfg_addr[8:0])), .lw_data(cfg_wdata[2*PHASE_W-1:0]),
      .tcmd_valid(tmpl_valid && tmpl_cmd.ch_mask[c]), .tcmd(tmpl_cmd),
      .scmd_valid(sel_valid && sel_cmd.ch_mask[c]), .scmd(sel_cmd),
      .fb_mask, .dout(dac_out[c]));
  end

  // ------------------------------------------------------------ store path
  logic [NC-1:0]             wmask;
  logic [BAW-1:0]            wptr, job_start, buf_rd_addr;
  logic [$clog2(NC+1)-1:0]   wr_count;
  logic                      job_valid, job_pop, buf_rd_en, store_active_unused;
  logic [31:0]               job_words;
  logic [SDRAM_LINE_AW-1:0]  job_line;
  iq2_t                      buf_rd_data;
  logic [$clog2(BWORDS+1)-1:0] occ_unused;

  store_ctrl #(.NIN(NC), .WORDS(BWORDS)) u_store (
    .clk, .rst_n, .cmd_valid(store_valid), .cmd(store_cmd), .wmask, .wptr, .wr_count,
    .job_valid, .job_start, .job_words, .job_line, .job_pop,
    .active(store_active_unused), .collision(err_store_collision), .job_ovf(err_job_overflow));

  sample_buffer #(.NIN(NC), .WORDS(BWORDS)) u_buf (
    .clk, .rst_n, .wmask, .din(adc_in), .wptr, .wr_count,
    .rd_en(buf_rd_en), .rd_addr(buf_rd_addr), .rd_data(buf_rd_data),
    .occupancy(occ_unused), .ovf_clr(start), .overflow(err_overflow));

  transfer_accum #(.WORDS(BWORDS)) u_xfer (
    .clk, .rst_n, .job_valid, .job_start, .job_words, .job_line, .job_pop,
    .buf_rd_en, .buf_rd_addr, .buf_rd_data,
    .rd_req_valid(sd_rd_valid), .rd_req_ready(sd_rd_ready), .rd_req_line(sd_rd_line),
    .rd_resp_valid(sd_resp_valid), .rd_resp_data(sd_resp_data),
    .wr_valid(sd_wr_valid), .wr_ready(sd_wr_ready), .wr_line(sd_wr_line),
    .wr_data(sd_wr_data), .busy(xfer_busy));

  // ------------------------------------------------------------ matching
  for (genvar u = 0; u < NM; u++) begin : g_match
    logic [NCW-1:0] chsel;
    logic           busy_unused;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) chsel <= '0;
      else if (cfg_we && region == CFG_MATCH_CFG && cfg_addr[22:16] == 7'(u))
        chsel <= NCW'(cfg_wdata[3:0]);
    end
    match_unit #(.DEPTH(MDEPTH)) u_m (
      .clk, .rst_n,
      .wr_en(cfg_we && region == CFG_MATCH_TEMPL && cfg_addr[22:16] == 7'(u)),
      .wr_addr(MAW'(cfg_addr[8:0])), .wr_data(iq2_t'(cfg_wdata[63:0])),
      .len_we(cfg_we && region == CFG_MATCH_CFG && cfg_addr[22:16] == 7'(u)),
      .len_data(($clog2(MDEPTH+1))'(cfg_wdata[25:16])),
      .start(match_valid && match_cmd.unit_mask[u]),
      .s(adc_in[chsel]), .result(match_res[u]), .valid(match_done[u]), .busy(busy_unused));
  end

  // ------------------------------------------------------------ feedback
  feedback_unit #(.NP(NM/2)) u_fb (
    .clk, .rst_n, .res(match_res),
    .thr_we(cfg_we && region == CFG_FB_THR), .thr_idx(($clog2(NM/2))'(cfg_addr[5:0])),
    .thr_data(cfg_wdata[MATCH_W:0]),
    .op_we(cfg_we && region == CFG_FB_OP), .op_bit(cfg_addr[2:0]),
    .op_care(cfg_wdata[NM/2-1:0]), .op_val(cfg_wdata[64 +: NM/2]),
    .r_o(fb_r), .mask(fb_mask));
endmodule
