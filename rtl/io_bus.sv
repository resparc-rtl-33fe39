// io_bus -- the global IO_BUS shared by all NeuroCells.
//
// Towards the NeuroCells it carries one broadcast beat per cycle from the
// global control unit: every NeuroCell whose tag (x, y) lies in the beat's
// tag rectangle [x_lo..x_hi] x [y_lo..y_hi] receives it in the same cycle,
// so one input-memory word reaches all NeuroCells of a layer at once.
// NeuroCell n has tag x = n % NCX, y = n / NCX.
// In the other direction it carries the spike packets that NeuroCells send
// back to the input memory (the only path between NeuroCells): one
// NeuroCell at a time, chosen round-robin, and only in cycles without a
// broadcast, because the bus is shared. The tag broadcast follows the
// architecture; the rectangle form of the tag range and the arbitration are
// this design's choices.
module io_bus
  import resparc_pkg::*;
#(
  parameter int NCX = 2,
  parameter int NCY = 2,
  localparam int NNC = NCX * NCY
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // broadcast from the global control unit
  input  logic                         bc_valid,
  input  io_bcast_t                    bc,
  output logic [NNC-1:0]               nc_in_valid,
  output logic [3:0]                   nc_in_mpe,
  output logic [1:0]                   nc_in_mca,
  output logic [PKT_W-1:0]             nc_in_data,
  // NeuroCell outputs
  input  logic [NNC-1:0]               nc_out_valid,
  input  logic [NNC-1:0][SRAM_AW-1:0]  nc_out_addr,
  input  logic [NNC-1:0][PKT_W-1:0]    nc_out_data,
  output logic [NNC-1:0]               nc_out_ready,
  // write stream towards the input memory
  output logic                         wr_valid,
  output logic [SRAM_AW-1:0]           wr_addr,
  output logic [PKT_W-1:0]             wr_data,
  input  logic                         wr_ready
);

  // NeuroCell n has tag (x, y) = (n % NCX, n / NCX)
  for (genvar n = 0; n < NNC; n++) begin : g_tag
    assign nc_in_valid[n] = bc_valid &&
                            (n % NCX) >= int'(bc.x_lo) && (n % NCX) <= int'(bc.x_hi) &&
                            (n / NCX) >= int'(bc.y_lo) && (n / NCX) <= int'(bc.y_hi);
  end
  assign nc_in_mpe  = bc.mpe;
  assign nc_in_mca  = bc.mca;
  assign nc_in_data = bc.data;

  localparam int IW = (NNC > 1) ? $clog2(NNC) : 1;
  logic [IW-1:0] last, sel;
  logic          any;

  // round robin: the first valid NeuroCell after the last one granted
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= NNC; k++) begin
      if (!any && nc_out_valid[(int'(last) + k) % NNC]) begin
        any = 1'b1;
        sel = IW'((int'(last) + k) % NNC);
      end
    end
  end

  assign wr_valid = any && !bc_valid;
  assign wr_addr  = nc_out_addr[sel];
  assign wr_data  = nc_out_data[sel];

  always_comb begin
    nc_out_ready = '0;
    nc_out_ready[sel] = wr_valid && wr_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    last <= IW'(NNC - 1);
    else if (wr_valid && wr_ready) last <= sel;
  end

endmodule
