// match_unit: one template-matching unit (matched filter).
//
// It holds a complex reference template tau of up to DEPTH words (two IQ
// pairs per word, 1022 pairs at the default) and, once started, multiplies
// each incoming word of the signal s with the template word of the same
// index and accumulates the real part of conj(tau) * s, that is
// tau_i*s_i + tau_q*s_q summed over both samples of the word. After
// len_words words the sum <s,tau> is presented on `result` with a one-clock
// `valid` pulse and held until the next window ends.
//
// Timing: a start sampled at edge t makes the input words sampled at edges
// t+1 .. t+L the window (L = len_words). The product is registered one edge
// later and accumulated one edge after that, so `result` and `valid` appear
// after edge t+L+2: two of the five feedback pipeline stages. A start while
// words are still being sampled is ignored; a start on the edge after the
// last sampled word is accepted, so windows can follow back to back. From the paper: the operation Re{sum tau* s}, 128
// such units, 1022-pair window. This design's choice: the 48-bit result
// width, the two-stage pipeline, ignoring a start during a window.
module match_unit
  import presto_pkg::*;
#(
  parameter int unsigned DEPTH = TEMPL_WORDS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  iq2_t                       wr_data,
  input  logic                       len_we,
  input  logic [$clog2(DEPTH+1)-1:0] len_data,
  input  logic                       start,
  input  iq2_t                       s,
  output logic signed [MATCH_W-1:0]  result,
  output logic                       valid,
  output logic                       busy
);
  localparam int unsigned AW = $clog2(DEPTH);
  iq2_t mem [DEPTH];
  iq2_t ref_q, s_q;
  logic [AW-1:0] addr;
  logic [$clog2(DEPTH+1)-1:0] len;
  logic active, a_v, a_last, p_v, p_last;
  logic signed [33:0] prod;
  logic signed [MATCH_W-1:0] acc;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    ref_q <= mem[addr];
    s_q   <= s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      len <= '0; active <= 1'b0; addr <= '0; a_v <= 1'b0; a_last <= 1'b0;
      p_v <= 1'b0; p_last <= 1'b0; prod <= '0; acc <= '0; result <= '0; valid <= 1'b0;
    end else begin
      if (len_we) len <= len_data;
      // stage A: window word sampled together with the template word
      a_v    <= active;
      a_last <= active && (32'(addr) == 32'(len) - 1);
      if (start && !active) begin
        active <= (len != 0);
        addr   <= '0;
      end else if (active) begin
        if (32'(addr) == 32'(len) - 1) active <= 1'b0;
        else addr <= addr + 1'b1;
      end
      // stage B: products
      p_v    <= a_v;
      p_last <= a_last;
      prod   <= 34'(32'(ref_q[0].i) * 32'(s_q[0].i)) + 34'(32'(ref_q[0].q) * 32'(s_q[0].q))
              + 34'(32'(ref_q[1].i) * 32'(s_q[1].i)) + 34'(32'(ref_q[1].q) * 32'(s_q[1].q));
      // stage C: accumulate; the first word of a window overwrites
      valid <= 1'b0;
      if (p_v) begin
        if (p_last) begin
          result <= acc + MATCH_W'(prod);
          acc    <= '0;
          valid  <= 1'b1;
        end else begin
          acc <= acc + MATCH_W'(prod);
        end
      end
    end
  end

  assign busy = active | a_v | p_v;
endmodule
