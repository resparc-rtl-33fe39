// input_sram -- the input memory of the RESPARC core.
//
// Holds the input spike packets of every time step and the packets that
// NeuroCells write back for layers mapped on other NeuroCells. In silicon
// this is an SRAM macro; here it is a plain array with one synchronous
// write port and one synchronous read port (rd_data is valid the cycle
// after rd_en), which synthesis maps to a memory. Depth and ports are this
// design's choices.
module input_sram
  import resparc_pkg::*;
#(
  parameter int DEPTH = 1 << SRAM_AW,
  parameter int W     = PKT_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
