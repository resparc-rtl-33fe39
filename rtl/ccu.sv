// ccu -- Current Control Unit of an mPE.
//
// When a neuron's fan-in is spread over the crossbars of two neighbouring
// mPEs, the column currents of one MCA of the lending mPE are carried over a
// gated wire to the borrowing mPE, whose neurons integrate them as C_ext in
// one step of their time-multiplexed evaluation. The CCU is both ends of
// that transfer:
//  * lender side (tx_en): drives I_out with the currents of MCA tx_sel (the
//    wire is gated off otherwise). It raises wait_out while its own currents
//    are not valid yet, and records in served that a transfer took place.
//  * borrower side: while the local control unit needs C_ext (need_ext) it
//    raises req_out; the step completes (ext_ok) in a cycle where the lender
//    does not answer with wait.
// The request / wait / I_out / C_ext signal names follow the architecture;
// the handshake rules are this design's: a transfer happens in exactly the
// cycle where request is high and wait is low, seen identically by both ends.
module ccu
  import resparc_pkg::*;
#(
  parameter int N  = MCA_N,
  parameter int CW = CUR_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          tx_en,
  input  logic [1:0]                    tx_sel,
  // local MCA currents C1..C4
  input  logic [N_MCA-1:0][N-1:0][CW-1:0] c_loc,
  input  logic                          cur_valid,
  // lender side
  input  logic                          req_in,
  output logic                          wait_out,
  output logic [N-1:0][CW-1:0]          i_out,
  input  logic                          clear_served,
  output logic                          served,
  // borrower side
  input  logic                          need_ext,
  output logic                          req_out,
  input  logic                          wait_in,
  input  logic [N-1:0][CW-1:0]          c_ext_in,
  output logic [N-1:0][CW-1:0]          c_ext,
  output logic                          ext_ok
);

  assign i_out    = tx_en ? c_loc[tx_sel] : '0;
  assign wait_out = !(tx_en && cur_valid);

  assign req_out  = need_ext;
  assign ext_ok   = need_ext && !wait_in;
  assign c_ext    = c_ext_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         served <= 1'b0;
    else if (clear_served)              served <= 1'b0;
    else if (req_in && !wait_out)       served <= 1'b1;
  end

endmodule
