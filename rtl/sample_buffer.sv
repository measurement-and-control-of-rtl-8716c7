// sample_buffer: the high-bandwidth store buffer shared by all inputs.
//
// Each clock, any subset of the NCH inputs may deliver one word (two IQ
// pairs) each. The words of the active inputs are packed in ascending
// channel order at consecutive buffer addresses starting at the write
// pointer, so the whole buffer is usable however many inputs are streaming.
// The buffer is split into NB = NCH banks, address a living in bank a mod NB
// at row a / NB; up to NB consecutive addresses always fall in different
// banks, so all words of a clock are written at once with one write port
// per bank. The buffer is a ring: the write pointer wraps at WORDS.
//
// A read port returns one word per clock (1 GS/s complex), one clock after
// the address, for the transfer to SDRAM; every read frees one word. A word
// can be read from the clock after the one in which it was written.
// Occupancy is tracked: a clock whose words do not all fit is dropped as a
// whole and `overflow` is set until cleared.
//
// From the paper: shared by all 16 inputs, 16 simultaneous 1 GS/s streams,
// 2**19 IQ pairs (WORDS = 2**18 words of two pairs), all of it available
// regardless of the number of active inputs. This design's choice: the
// banked layout, ring addressing and drop-on-overflow.
module sample_buffer
  import presto_pkg::*;
#(
  parameter int unsigned NIN   = NCH,
  parameter int unsigned WORDS = 2**18
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NIN-1:0]           wmask,
  input  iq2_t                     din [NIN],
  output logic [$clog2(WORDS)-1:0] wptr,
  output logic [$clog2(NIN+1)-1:0] wr_count,   // words accepted this clock
  input  logic                     rd_en,
  input  logic [$clog2(WORDS)-1:0] rd_addr,
  output iq2_t                     rd_data,
  output logic [$clog2(WORDS+1)-1:0] occupancy,
  input  logic                     ovf_clr,
  output logic                     overflow
);
  localparam int unsigned NB   = NIN;
  localparam int unsigned BW   = $clog2(NB);
  localparam int unsigned AW   = $clog2(WORDS);
  localparam int unsigned ROWS = WORDS / NB;
  localparam int unsigned RW   = $clog2(ROWS);

  logic [$clog2(NIN+1)-1:0] pos [NIN];   // rank of each input among active ones
  logic [$clog2(NIN+1)-1:0] nact;
  logic                     fits;
  logic [BW-1:0]            rd_bank_q;
  iq2_t                     bank_q [NB];

  always_comb begin
    nact = '0;
    for (int c = 0; c < NIN; c++) begin
      pos[c] = nact;
      nact   = nact + {{($clog2(NIN+1)-1){1'b0}}, wmask[c]};
    end
  end

  assign fits     = (32'(occupancy) + 32'(nact)) <= 32'(WORDS);
  assign wr_count = fits ? nact : '0;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    iq2_t          mem [ROWS];
    logic          we;
    logic [RW-1:0] wrow;
    iq2_t          wdata;
    always_comb begin
      logic [AW-1:0] a;
      we = 1'b0; wrow = '0; wdata = '0;
      for (int c = 0; c < NIN; c++) begin
        a = wptr + AW'(pos[c]);
        if (wmask[c] && a[BW-1:0] == BW'(b)) begin
          we    = fits;
          wrow  = a[AW-1:BW];
          wdata = din[c];
        end
      end
    end
    always_ff @(posedge clk) begin
      if (we) mem[wrow] <= wdata;
      bank_q[b] <= mem[rd_addr[AW-1:BW]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; occupancy <= '0; overflow <= 1'b0; rd_bank_q <= '0;
    end else begin
      rd_bank_q <= rd_addr[BW-1:0];
      if (fits) wptr <= wptr + AW'(nact);
      occupancy <= occupancy + (fits ? ($clog2(WORDS+1))'(nact) : '0)
                             - ($clog2(WORDS+1))'(rd_en);
      if (ovf_clr)            overflow <= 1'b0;
      else if (!fits)         overflow <= 1'b1;
    end
  end

  assign rd_data = bank_q[rd_bank_q];

  // the packing must never put two words in one bank
  initial assert (NB >= NIN && (1 << BW) == NB && WORDS % NB == 0)
    else $error("sample_buffer: bank count must be a power of two >= NIN");
endmodule
