// lcu -- Local Control Unit of an mPE: control registers and sequencer.
//
// Registers (written through cfg_we/cfg_addr/cfg_wdata):
//   0x00 CTRL  [0] enable  [2:1] layer (NeuroCell phase)  [5:3] degree
//   0x01 CCU   [0] tx_en  [2:1] tx_sel  [3] rx_en  [5:4] rx_dir (0 N,1 E,2 S,3 W)
//   0x02 VTH   [15:0] neuron threshold
//   0x08+m     MCA m: [0] iBUFF fed from IO_In (else SW_In)  [1] neurons fire
//   0x10+8m+k  MCA m, step k: source of the group's current (src_sel_e)
// The degree is the number of time-multiplexed steps (1..5): in step k every
// neuron group m integrates the current chosen by its source register, one
// of C1..C4 (its own crossbar or another of the mPE) or C_ext from a
// neighbour, as in the time-multiplexed mapping of wide fan-in neurons.
//
// Sequence, started by phase_go when enabled and phase == layer:
//   READ  all four crossbars evaluate their iBUFF contents (1 cycle)
//   STEP  degree steps; a step that uses C_ext waits for ext_ok
//   FIRE  groups with neurons enabled compare with the threshold (1 cycle)
//   LOAD  spike packets go to the oBUFFs (1 cycle)
//   SEND  wait until every oBUFF has been delivered
//   SERVE if lending current, wait until the neighbour took it
//   DONE  iBUFFs and crossbar outputs are released (1 cycle), then IDLE
// The register map, the state sequence and its timing are this design's.
module lcu
  import resparc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [7:0]            cfg_addr,
  input  logic [31:0]           cfg_wdata,
  // phase control from the NeuroCell
  input  logic                  phase_go,
  input  logic [1:0]            phase,
  output logic                  busy,
  // configuration outputs
  output logic [N_MCA-1:0]      in_io,
  output logic [N_MCA-1:0]      nrn_en,
  output logic [VMEM_W-1:0]     vth,
  output logic                  tx_en,
  output logic [1:0]            tx_sel,
  output logic                  rx_en,
  output logic [1:0]            rx_dir,
  // datapath control
  output logic                  mca_read,
  output logic [N_MCA-1:0]      integ_en,
  output src_sel_e [N_MCA-1:0]  src_sel,
  output logic [N_MCA-1:0]      fire_en,
  output logic [N_MCA-1:0]      obuf_load,
  input  logic                  obuf_busy,
  output logic                  need_ext,
  input  logic                  ext_ok,
  input  logic                  served,
  output logic                  release_o
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_STEP, S_FIRE, S_LOAD, S_SEND, S_SERVE, S_DONE} state_e;

  logic       enable;
  logic [1:0] layer;
  logic [2:0] degree;
  src_sel_e   sel_r [N_MCA][MAX_STEP];
  state_e     st;
  logic [2:0] step;

  // ---------------- control registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable <= 1'b0; layer <= '0; degree <= '0;
      tx_en <= 1'b0; tx_sel <= '0; rx_en <= 1'b0; rx_dir <= '0;
      vth <= '0; in_io <= '0; nrn_en <= '0;
      for (int m = 0; m < N_MCA; m++)
        for (int k = 0; k < MAX_STEP; k++) sel_r[m][k] <= SRC_NONE;
    end else if (cfg_we) begin
      case (cfg_addr)
        8'h00: begin enable <= cfg_wdata[0]; layer <= cfg_wdata[2:1]; degree <= cfg_wdata[5:3]; end
        8'h01: begin tx_en <= cfg_wdata[0]; tx_sel <= cfg_wdata[2:1];
                     rx_en <= cfg_wdata[3]; rx_dir <= cfg_wdata[5:4]; end
        8'h02: vth <= cfg_wdata[VMEM_W-1:0];
        8'h08, 8'h09, 8'h0a, 8'h0b: begin
          in_io[cfg_addr[1:0]]  <= cfg_wdata[0];
          nrn_en[cfg_addr[1:0]] <= cfg_wdata[1];
        end
        default: ;
      endcase
      if (cfg_addr >= 8'h10 && cfg_addr < 8'h30 && cfg_addr[2:0] < 3'(MAX_STEP))
        sel_r[2'(cfg_addr[5:3] - 3'd2)][cfg_addr[2:0]] <= src_sel_e'(cfg_wdata[2:0]);
    end
  end

  // ---------------- sequencer ----------------
  logic uses_ext;
  always_comb begin
    uses_ext = 1'b0;
    for (int m = 0; m < N_MCA; m++) begin
      src_sel[m] = (st == S_STEP && step < 3'(MAX_STEP)) ? sel_r[m][step] : SRC_NONE;
      if (src_sel[m] == SRC_CEXT) uses_ext = 1'b1;
    end
  end

  assign need_ext  = (st == S_STEP) && uses_ext;
  logic  step_go;
  assign step_go   = (st == S_STEP) && (!uses_ext || ext_ok);

  always_comb begin
    for (int m = 0; m < N_MCA; m++) begin
      integ_en[m]  = step_go && (src_sel[m] != SRC_NONE);
      fire_en[m]   = (st == S_FIRE) && nrn_en[m];
      obuf_load[m] = (st == S_LOAD) && nrn_en[m];
    end
  end

  assign mca_read  = (st == S_READ);
  assign release_o = (st == S_DONE);
  assign busy      = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      step <= '0;
    end else begin
      unique case (st)
        S_IDLE:  if (phase_go && enable && phase == layer) st <= S_READ;
        S_READ:  begin step <= '0; st <= (degree == '0) ? S_FIRE : S_STEP; end
        S_STEP:  if (step_go) begin
                   if (step + 3'd1 >= degree) st <= S_FIRE;
                   step <= step + 3'd1;
                 end
        S_FIRE:  st <= S_LOAD;
        S_LOAD:  st <= S_SEND;
        S_SEND:  if (!obuf_busy) st <= tx_en ? S_SERVE : S_DONE;
        S_SERVE: if (served) st <= S_DONE;
        S_DONE:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
