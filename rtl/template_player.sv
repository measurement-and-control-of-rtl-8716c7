// template_player: one output template (arbitrary waveform) and its playback.
//
// The template memory holds up to DEPTH words of two IQ pairs each (1022 IQ
// pairs = 1022 ns at the default), written before the run through the
// configuration port; len_words sets how many words are played. A start
// command plays the words from address 0 once, or repeatedly while `loop`
// is set, until the end or a stop command. A start with `cond` set plays only
// if bit `cond_bit` of the feedback mask is 1 at the moment of the start;
// otherwise the command is dropped. `envelope` is latched with the start and
// tells the group whether this template is multiplied by the carrier or
// output raw. A new start while playing restarts the template.
//
// Timing: a start sampled at clock edge t puts word 0 on `dout` after edge
// t+1 and `dout` is zero when idle, so templates can be summed freely. One
// word per clock (1 GS/s complex). From the paper: 1022 IQ pairs, play, loop,
// raw or envelope, gating by a mask bit. This design's choice: the command
// encoding, the length register and the restart-on-start rule.
module template_player
  import presto_pkg::*;
#(
  parameter int unsigned DEPTH = TEMPL_WORDS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  iq2_t                     wr_data,
  input  logic                     len_we,
  input  logic [$clog2(DEPTH+1)-1:0] len_data,
  // commands from the sequencer
  input  logic                     start,
  input  logic                     stop,
  input  logic                     loop,
  input  logic                     envelope,
  input  logic                     cond,
  input  logic [2:0]               cond_bit,
  input  logic [MASK_W-1:0]        fb_mask,
  // waveform out
  output iq2_t                     dout,
  output logic                     env_o,
  output logic                     busy
);
  localparam int unsigned AW = $clog2(DEPTH);
  iq2_t                     mem [DEPTH];
  logic [AW-1:0]            addr;
  logic [$clog2(DEPTH+1)-1:0] len;
  logic                     playing, looping, env_q, rd_valid;
  iq2_t                     rdata;
  logic                     go;

  assign go = start && (!cond || fb_mask[cond_bit]);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rdata <= mem[addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      len <= '0; playing <= 1'b0; looping <= 1'b0; env_q <= 1'b0;
      addr <= '0; rd_valid <= 1'b0;
    end else begin
      if (len_we) len <= len_data;
      rd_valid <= playing;
      if (go) begin
        playing <= (len != 0);
        looping <= loop;
        env_q   <= envelope;
        addr    <= '0;
      end else if (stop) begin
        playing <= 1'b0;
      end else if (playing) begin
        if (32'(addr) == 32'(len) - 1) begin
          addr    <= '0;
          playing <= looping;
        end else begin
          addr <= addr + 1'b1;
        end
      end
    end
  end

  assign dout  = rd_valid ? rdata : '0;
  assign env_o = env_q;
  assign busy  = playing | rd_valid;
endmodule
