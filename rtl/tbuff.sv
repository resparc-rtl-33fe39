// tbuff -- target buffer (tBUFF) of one MCA's neuron group.
//
// A small register file of target addresses for the group's output spike
// packet, written through the configuration port and read by index while
// the oBUFF sends. An entry either names a destination MCA in the NeuroCell
// (switch id, corner of the mPE around that switch, MCA id) or, with to_io
// set, an input-memory word reached over the global IO bus. n_tgt is the
// number of valid entries. Reads are combinational; writes land on the edge.
module tbuff
  import resparc_pkg::*;
#(
  parameter int NT = N_TGT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(NT)-1:0]   wr_idx,
  input  target_t                 wr_tgt,
  input  logic                    cnt_we,
  input  logic [$clog2(NT+1)-1:0] cnt_wdata,
  input  logic [$clog2(NT)-1:0]   rd_idx,
  output target_t                 rd_tgt,
  output logic [$clog2(NT+1)-1:0] n_tgt
);

  target_t ent [NT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NT; i++) ent[i] <= '0;
      n_tgt <= '0;
    end else begin
      if (wr_en)  ent[wr_idx] <= wr_tgt;
      if (cnt_we) n_tgt <= cnt_wdata;
    end
  end

  assign rd_tgt = ent[rd_idx];

endmodule
