// presto_pkg: types and constants shared by the pulsed-mode datapath.
//
// The datapath runs at 500 MHz and carries two complex samples per clock
// (1 GS/s complex per channel). A sample is a pair of signed 16-bit I and Q
// values. Sizes that the paper states (16 channels, 16 templates of 1022 IQ
// pairs, 512-entry tables, 40-bit carrier words, 17-bit gain, 128 matching
// units, 64 pairs, 8-bit mask, 2^19-pair store buffer, 48-bit sequence time)
// are taken from it. The event format and opcodes are this design's own.
package presto_pkg;

  // ---------------------------------------------------------------- samples
  typedef struct packed {
    logic signed [15:0] i;
    logic signed [15:0] q;
  } iq_t;

  localparam int unsigned SPC = 2;            // samples per clock
  typedef iq_t [SPC-1:0] iq2_t;               // one clock of one channel

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NCH       = 16;     // output and input channels
  localparam int unsigned NTEMPL    = 16;     // output templates per channel
  localparam int unsigned NGROUP    = 2;      // template groups per channel
  localparam int unsigned TEMPL_WORDS = 511;  // 1022 IQ pairs / 2 per clock
  localparam int unsigned LUT_DEPTH = 512;    // frequency/phase/gain tables
  localparam int unsigned FREQ_W    = 40;
  localparam int unsigned PHASE_W   = 40;
  localparam int unsigned GAIN_W    = 17;     // signed, 16 fraction bits: -1 .. 1-2**-16
  localparam int unsigned NMATCH    = 128;
  localparam int unsigned NPAIRS    = NMATCH / 2;
  localparam int unsigned MASK_W    = 8;
  localparam int unsigned MATCH_W   = 48;     // template-matching result
  localparam int unsigned TIME_W    = 48;     // sequence timer
  localparam int unsigned RUN_W     = 64;     // total run-time counter
  localparam int unsigned NMARK     = 4;      // marker outputs
  localparam int unsigned NTRIG     = 4;      // trigger inputs
  localparam int unsigned NBIAS     = 16;     // DC-bias outputs
  localparam int unsigned SDRAM_LINE_AW = 27; // 2**29 32-bit words, 4 per line

  // ---------------------------------------------------------------- events
  // Every event holds a 48-bit time, an opcode and a 160-bit argument field.
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_TEMPLATE = 4'd1,   // start/stop output templates
    OP_SELECT   = 4'd2,   // pick frequency/phase/gain table entries
    OP_STORE    = 4'd3,   // open a store window
    OP_MATCH    = 4'd4,   // start template-matching windows
    OP_MARKER   = 4'd5,   // set digital marker outputs
    OP_BIAS     = 4'd6,   // set one DC-bias value
    OP_END      = 4'd7    // end of one repetition of the sequence
  } opcode_e;

  localparam int unsigned ARG_W = 160;

  typedef struct packed {
    logic [TIME_W-1:0] time_;
    opcode_e           op;
    logic [ARG_W-1:0]  arg;
  } event_t;

  // Event-class queues of the sequencer (one time-controlled FIFO each).
  localparam int unsigned NQ = 5;
  localparam int unsigned Q_TEMPLATE = 0, Q_SELECT = 1, Q_STORE = 2,
                          Q_MATCH = 3, Q_IO = 4;

  // OP_TEMPLATE arguments
  typedef struct packed {
    logic [ARG_W-40-1:0] pad;
    logic [NCH-1:0]      ch_mask;    // channels addressed
    logic [NTEMPL-1:0]   tmpl_mask;  // templates addressed
    logic                stop;       // 1: stop the templates, 0: start them
    logic                loop;       // play repeatedly until stopped
    logic                envelope;   // 1: multiply by the group carrier
    logic                cond;       // 1: play only if mask bit is set
    logic [2:0]          cond_bit;   // which feedback-mask bit gates it
    logic                pad2;
  } tmpl_arg_t;

  // OP_SELECT arguments
  typedef struct packed {
    logic [ARG_W-48-1:0] pad;
    logic [NCH-1:0]      ch_mask;
    logic [NGROUP-1:0]   grp_mask;
    logic                set_freq, set_phase, set_gain;
    logic [8:0]          freq_idx, phase_idx, gain_idx;
  } sel_arg_t;

  // OP_STORE arguments
  typedef struct packed {
    logic [ARG_W-72-1:0]      pad;
    logic [NCH-1:0]           ch_mask;    // inputs stored
    logic [28:0]              len;        // window length in clocks (>=1)
    logic [SDRAM_LINE_AW-1:0] sdram_line; // first SDRAM line to add into
  } store_arg_t;

  // OP_MATCH arguments
  typedef struct packed {
    logic [ARG_W-NMATCH-1:0] pad;
    logic [NMATCH-1:0]       unit_mask;   // matching units started
  } match_arg_t;

  // OP_MARKER / OP_BIAS arguments
  typedef struct packed {
    logic [ARG_W-44-1:0] pad;
    logic [NMARK-1:0]    mark_mask;   // markers written
    logic [NMARK-1:0]    mark_val;
    logic [3:0]          bias_ch;
    logic [15:0]         bias_val;
    logic [15:0]         pad2;
  } io_arg_t;

  function automatic int unsigned queue_of(opcode_e op);
    case (op)
      OP_TEMPLATE: return Q_TEMPLATE;
      OP_SELECT:   return Q_SELECT;
      OP_STORE:    return Q_STORE;
      OP_MATCH:    return Q_MATCH;
      default:     return Q_IO;
    endcase
  endfunction

  // ---------------------------------------------------------------- helpers
  function automatic logic signed [15:0] sat16(input logic signed [31:0] v);
    if (v > 32'sd32767)       return 16'sd32767;
    else if (v < -32'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

  // Configuration write bus regions (cfg_addr[31:28]).
  localparam logic [3:0] CFG_OUT_TEMPL = 4'h0, CFG_GEN_LUT = 4'h1,
                         CFG_MATCH_TEMPL = 4'h2, CFG_MATCH_CFG = 4'h3,
                         CFG_FB_THR = 4'h4, CFG_FB_OP = 4'h5;

endpackage
