// cordic_sincos: pipelined CORDIC that turns a phase into cos and sin.
//
// The phase is an unsigned fraction of a full turn (ANGLE_W bits, 2**ANGLE_W
// = 2*pi). The top two bits fold the angle into [-pi/2, pi/2): angles in the
// left half-plane are rotated by pi and the result negated at the output.
// Sixteen rotation stages follow, one per clock; each stage i rotates the
// vector by +-atan(2**-i), driving the residual angle to zero. The start
// vector (19898, 0) makes the output amplitude 32767 after the CORDIC gain
// of 1.64676. atan table entry i is round(atan(2**-i) / (2*pi) * 2**20).
//
// Interface: one angle in per clock, cos and sin out 18 clocks
// later; fully pipelined, no handshake. The paper states only that the
// carrier generator is a numerically controlled tone; the use of CORDIC is
// this design's choice.
module cordic_sincos #(
  parameter int unsigned ANGLE_W = 20
) (
  input  logic                     clk,
  input  logic [ANGLE_W-1:0]       angle,
  output logic signed [15:0]       cos_o,
  output logic signed [15:0]       sin_o
);
  localparam int unsigned NSTAGE = 16;
  localparam int unsigned IW     = 20;   // internal vector width
  localparam logic signed [IW-1:0] X0 = 20'sd19898;

  function automatic logic [19:0] atan_tab(input int unsigned i);
    case (i)
      0: return 20'd131072;  1: return 20'd77376;  2: return 20'd40884;
      3: return 20'd20753;   4: return 20'd10417;  5: return 20'd5213;
      6: return 20'd2607;    7: return 20'd1304;   8: return 20'd652;
      9: return 20'd326;    10: return 20'd163;   11: return 20'd81;
     12: return 20'd41;     13: return 20'd20;    14: return 20'd10;
      default: return 20'd5;
    endcase
  endfunction

  logic signed [IW-1:0] x [NSTAGE+1];
  logic signed [IW-1:0] y [NSTAGE+1];
  logic signed [20:0]   z [NSTAGE+1];   // residual angle, 2**20 = full turn
  logic                 neg [NSTAGE+1];

  // stage 0: fold into the right half-plane, scale to 20-bit turn units
  logic [19:0] a20;
  always_comb begin
    if (ANGLE_W >= 20) a20 = angle[ANGLE_W-1 -: 20];
    else               a20 = 20'(angle) << (20 - ANGLE_W);
  end

  always_ff @(posedge clk) begin
    x[0]   <= X0;
    y[0]   <= '0;
    neg[0] <= a20[19] ^ a20[18];
    // rotating by pi flips bit 19, which leaves bit 18 as the new sign;
    // the folded angle lies in [-2**18, 2**18) turn units = [-pi/2, pi/2)
    z[0]   <= $signed({a20[18], a20[18], a20[18:0]});
  end

  for (genvar s = 0; s < NSTAGE; s++) begin : g_stage
    always_ff @(posedge clk) begin
      neg[s+1] <= neg[s];
      if (z[s] >= 0) begin
        x[s+1] <= x[s] - (y[s] >>> s);
        y[s+1] <= y[s] + (x[s] >>> s);
        z[s+1] <= z[s] - $signed({1'b0, atan_tab(s)});
      end else begin
        x[s+1] <= x[s] + (y[s] >>> s);
        y[s+1] <= y[s] - (x[s] >>> s);
        z[s+1] <= z[s] + $signed({1'b0, atan_tab(s)});
      end
    end
  end

  always_ff @(posedge clk) begin
    cos_o <= sat16(neg[NSTAGE] ? -32'(x[NSTAGE]) : 32'(x[NSTAGE]));
    sin_o <= sat16(neg[NSTAGE] ? -32'(y[NSTAGE]) : 32'(y[NSTAGE]));
  end

  function automatic logic signed [15:0] sat16(input logic signed [31:0] v);
    if (v > 32'sd32767)       return 16'sd32767;
    else if (v < -32'sd32767) return -16'sd32767;
    else                      return v[15:0];
  endfunction
endmodule
