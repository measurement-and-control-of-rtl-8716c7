// carrier_gen: carrier generator of one template group.
//
// A 40-bit phase accumulator advances by twice the frequency word every
// clock, because each 2 ns clock carries two samples; sample 0 of a clock
// sits at the accumulator phase and sample 1 one frequency step later. The
// I component is cos(phase + phase_i) and the Q component sin(phase +
// phase_q), so the I and Q phase offsets are independent, as the paper
// states. The top 20 bits of each angle drive a CORDIC (four per generator:
// I and Q of two samples).
//
// Interface: freq, phase_i, phase_q are held inputs (from the group's look-up
// tables); clr restarts the accumulator at zero (start of a sequence run).
// Timing: a change of freq or a phase offset shows at the output 19 clocks
// later (1 register + 18 CORDIC). Frequency word f gives f / 2**40 cycles
// per sample. From the paper: 40-bit frequency and phase words, two samples
// per clock, independent I/Q phase offsets. This design's choice: phase
// continuity across frequency changes, CORDIC, 20-bit angle into the CORDIC.
module carrier_gen
  import presto_pkg::*;
#(
  parameter int unsigned FW = FREQ_W,
  parameter int unsigned PW = PHASE_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic [FW-1:0] freq,
  input  logic [PW-1:0] phase_i,
  input  logic [PW-1:0] phase_q,
  output iq2_t          carrier
);
  localparam int unsigned AW = 20;
  logic [FW-1:0] acc;
  logic [PW-1:0] ang_i [SPC];
  logic [PW-1:0] ang_q [SPC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else          acc <= acc + (freq << 1);
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      ang_i[k] <= PW'(acc + FW'(k) * freq) + phase_i;
      ang_q[k] <= PW'(acc + FW'(k) * freq) + phase_q;
    end
  end

  for (genvar k = 0; k < SPC; k++) begin : g_s
    logic signed [15:0] ci, si, cq, sq;
    cordic_sincos #(.ANGLE_W(AW)) u_i (.clk, .angle(ang_i[k][PW-1 -: AW]), .cos_o(ci), .sin_o(si));
    cordic_sincos #(.ANGLE_W(AW)) u_q (.clk, .angle(ang_q[k][PW-1 -: AW]), .cos_o(cq), .sin_o(sq));
    assign carrier[k].i = ci;
    assign carrier[k].q = sq;
  end
endmodule
