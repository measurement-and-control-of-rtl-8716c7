// sdram_model: behavioural model of the SDRAM behind the transfer engine.
//
// Not synthesizable. Lines are 128 bits and kept in an associative array, so
// only lines that are touched use memory; an untouched line reads as zero.
// Read requests are accepted when `rd_ready` is high and answered, in order,
// LAT clocks later. While `stall_en` is high, rd_ready and wr_ready drop at
// random (about one clock in four) to exercise back-pressure. While `rst_n`
// is low, requests are ignored, as a controller still in its own reset would.
module sdram_model #(
  parameter int unsigned LAT = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stall_en,
  input  logic         rd_valid,
  output logic         rd_ready,
  input  logic [26:0]  rd_line,
  output logic         resp_valid,
  output logic [127:0] resp_data,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [26:0]  wr_line,
  input  logic [127:0] wr_data
);
  logic [127:0] mem [logic [26:0]];
  logic         pipe_v [LAT];
  logic [127:0] pipe_d [LAT];
  int unsigned  writes = 0;

  function automatic logic [127:0] peek(input logic [26:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    rd_ready = 1'b1; wr_ready = 1'b1;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= rst_n && rd_valid && rd_ready;
    pipe_d[0] <= peek(rd_line);
    if (rst_n && wr_valid && wr_ready) begin
      mem[wr_line] = wr_data;
      writes++;
    end
    rd_ready <= !stall_en || ($urandom % 4) != 0;
    wr_ready <= !stall_en || ($urandom % 4) != 0;
  end

  assign resp_valid = pipe_v[LAT-1];
  assign resp_data  = pipe_d[LAT-1];
endmodule
