// ibuff -- input buffer (iBUFF) of one MCA.
//
// Spike packets for the MCA may arrive in several pieces (from different
// senders that drive disjoint rows of the crossbar, or over the IO bus).
// The buffer ORs every packet written into it, so the MCA row vector builds
// up until the evaluation reads it; consume empties it for the next time
// step. Because all-zero packets are filtered out on the way (zero-check),
// a row that receives nothing is simply left at 0.
// has_data tells whether any packet arrived. Writes and consume take effect
// on the next edge; a write in the same cycle as consume is kept.
module ibuff
  import resparc_pkg::*;
#(
  parameter int W = PKT_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         consume,
  output logic [W-1:0] data,
  output logic         has_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data     <= '0;
      has_data <= 1'b0;
    end else begin
      if (consume) begin
        data     <= wr_en ? wr_data : '0;
        has_data <= wr_en;
      end else if (wr_en) begin
        data     <= data | wr_data;
        has_data <= 1'b1;
      end
    end
  end

endmodule
