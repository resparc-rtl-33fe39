// obuff -- output buffer (oBUFF) of one MCA's neuron group.
//
// Holds the spike packet produced by a fire of the neurons until it has been
// delivered to every target listed in the tBUFF. load captures the packet
// when n_tgt is non-zero (a group with no target is never sent). The
// buffer then offers it on out_valid with tgt_idx naming the tBUFF entry to
// use; each accepted beat (out_valid & out_ready) moves to the next target;
// after the last one the buffer is empty again.
// Timing: out_valid rises the cycle after load; one target per accepted beat.
module obuff
  import resparc_pkg::*;
#(
  parameter int W  = PKT_W,
  parameter int NT = N_TGT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [W-1:0]            load_data,
  input  logic [$clog2(NT+1)-1:0] n_tgt,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [W-1:0]            out_data,
  output logic [$clog2(NT)-1:0]   tgt_idx,
  output logic                    busy
);

  logic [$clog2(NT+1)-1:0] remaining;

  assign out_valid = (remaining != '0);
  assign busy      = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_data  <= '0;
      remaining <= '0;
      tgt_idx   <= '0;
    end else if (load) begin
      out_data  <= load_data;
      remaining <= n_tgt;
      tgt_idx   <= '0;
    end else if (out_valid && out_ready) begin
      remaining <= remaining - 1'b1;
      tgt_idx   <= tgt_idx + 1'b1;
    end
  end

endmodule
