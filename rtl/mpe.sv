// mpe -- macro Processing Engine: four crossbars, their neurons and buffers.
//
// Each of the N_MCA lanes has an input mux (IO_In from the global bus or
// SW_In from the switch network, chosen per lane by a control register), an
// iBUFF, a crossbar (mca), a current mux, a group of integrate-and-fire
// neurons, an oBUFF and a tBUFF. The current mux lets a lane's neurons
// integrate, one step at a time, the currents of any of the four crossbars
// of this mPE or the current borrowed from a neighbour (C_ext), so a neuron
// whose fan-in spans several crossbars is evaluated by time multiplexing.
// The output mux sends the oBUFF packets, one target at a time, either to the
// switch network (SW_Out) or, for targets marked to_io, towards the global IO
// bus. The Local Control Unit (lcu) sequences the lane datapath and the
// Current Control Unit (ccu) handles borrowed and lent currents.
//
// Configuration address map: 0x00-0x3f lcu registers (see lcu), 0x40+4m+t
// tBUFF entry t of lane m (a target_t), 0x60+m number of targets of lane m.
// Inputs are written into the iBUFFs in the cycle they are valid (no
// back-pressure). The output mux takes lanes in fixed priority order; each
// beat is one packet to one target (valid/ready).
module mpe
  import resparc_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration and device programming
  input  logic                         cfg_we,
  input  logic [7:0]                   cfg_addr,
  input  logic [31:0]                  cfg_wdata,
  input  logic                         prog_we,
  input  logic [1:0]                   prog_mca,
  input  logic [5:0]                   prog_row,
  input  logic [5:0]                   prog_col,
  input  logic [W_BITS-1:0]            prog_g,
  // NeuroCell control
  input  logic                         nclear,
  input  logic                         phase_go,
  input  logic [1:0]                   phase,
  output logic                         busy,
  // IO_In
  input  logic                         io_in_valid,
  input  logic [1:0]                   io_in_mca,
  input  logic [PKT_W-1:0]             io_in_data,
  // SW_In
  input  logic                         sw_in_valid,
  input  logic [1:0]                   sw_in_mca,
  input  logic [PKT_W-1:0]             sw_in_data,
  // SW_Out
  output logic                         sw_out_valid,
  output sw_pkt_t                      sw_out,
  input  logic                         sw_out_ready,
  // output towards the IO bus
  output logic                         io_out_valid,
  output logic [SRAM_AW-1:0]           io_out_addr,
  output logic [PKT_W-1:0]             io_out_data,
  input  logic                         io_out_ready,
  // current transfer with neighbours
  output logic                         tx_en,
  output logic                         rx_en,
  output logic [1:0]                   rx_dir,
  input  logic                         req_in,
  output logic                         wait_out,
  output logic [MCA_N-1:0][CUR_W-1:0]  i_out,
  output logic                         req_out,
  input  logic                         wait_in,
  input  logic [MCA_N-1:0][CUR_W-1:0]  c_ext_in
);

  localparam int TIW = $clog2(N_TGT);
  localparam int TCW = $clog2(N_TGT + 1);

  // ---------------- control ----------------
  logic [N_MCA-1:0]     in_io, nrn_en, integ_en, fire_en, obuf_load;
  logic [VMEM_W-1:0]    vth;
  logic [1:0]           tx_sel;
  logic                 mca_read, need_ext, ext_ok, served, release_w, obuf_busy;
  src_sel_e [N_MCA-1:0] src_sel;

  lcu u_lcu (
    .clk, .rst_n,
    .cfg_we   (cfg_we && cfg_addr < 8'h40), .cfg_addr, .cfg_wdata,
    .phase_go, .phase, .busy,
    .in_io, .nrn_en, .vth, .tx_en, .tx_sel, .rx_en, .rx_dir,
    .mca_read, .integ_en, .src_sel, .fire_en, .obuf_load, .obuf_busy,
    .need_ext, .ext_ok, .served, .release_o(release_w)
  );

  // ---------------- lanes ----------------
  logic [N_MCA-1:0][MCA_N-1:0][CUR_W-1:0] c_loc;
  logic [N_MCA-1:0]                       cur_valid;
  logic [MCA_N-1:0][CUR_W-1:0]            c_ext;
  logic [N_MCA-1:0]                       ob_valid, ob_ready, ob_busy;
  logic [N_MCA-1:0][PKT_W-1:0]            ob_data;
  logic [N_MCA-1:0][TIW-1:0]              ob_idx;
  target_t [N_MCA-1:0]                    tgt;

  for (genvar m = 0; m < N_MCA; m++) begin : g_lane
    logic [PKT_W-1:0]            row_spk;
    logic                        has_data;
    logic [MCA_N-1:0][CUR_W-1:0] cur_mux;
    logic [MCA_N-1:0]            spk;
    logic [MCA_N-1:0][VMEM_W-1:0] vmem;
    logic [TCW-1:0]              n_tgt;
    logic                        wr_en;
    logic [PKT_W-1:0]            wr_data;

    // input mux (IO_In / SW_In)
    always_comb begin
      if (in_io[m]) begin
        wr_en   = io_in_valid && io_in_mca == 2'(m);
        wr_data = io_in_data;
      end else begin
        wr_en   = sw_in_valid && sw_in_mca == 2'(m);
        wr_data = sw_in_data;
      end
    end

    ibuff u_ibuff (
      .clk, .rst_n, .wr_en, .wr_data, .consume(release_w),
      .data(row_spk), .has_data
    );

    mca u_mca (
      .clk, .rst_n,
      .prog_we(prog_we && prog_mca == 2'(m)), .prog_row, .prog_col, .prog_g,
      .read_en(mca_read), .clear(release_w), .row_spk,
      .cur(c_loc[m]), .cur_valid(cur_valid[m])
    );

    // current mux in front of the neurons
    always_comb begin
      unique case (src_sel[m])
        SRC_C1:   cur_mux = c_loc[0];
        SRC_C2:   cur_mux = c_loc[1];
        SRC_C3:   cur_mux = c_loc[2];
        SRC_C4:   cur_mux = c_loc[3];
        SRC_CEXT: cur_mux = c_ext;
        default:  cur_mux = '0;
      endcase
    end

    if_neurons u_nrn (
      .clk, .rst_n, .clear(nclear), .integ_en(integ_en[m]), .cur(cur_mux),
      .fire_en(fire_en[m]), .vth, .spk, .vmem
    );

    tbuff u_tbuff (
      .clk, .rst_n,
      .wr_en (cfg_we && cfg_addr[7:4] == 4'h4 && cfg_addr[3:2] == 2'(m) && cfg_addr[1:0] < 2'(N_TGT)),
      .wr_idx(TIW'(cfg_addr[1:0])), .wr_tgt(target_t'(cfg_wdata[SRAM_AW:0])),
      .cnt_we(cfg_we && cfg_addr == 8'h60 + 8'(m)), .cnt_wdata(TCW'(cfg_wdata)),
      .rd_idx(ob_idx[m]), .rd_tgt(tgt[m]), .n_tgt
    );

    obuff u_obuff (
      .clk, .rst_n, .load(obuf_load[m]), .load_data(spk), .n_tgt,
      .out_valid(ob_valid[m]), .out_ready(ob_ready[m]), .out_data(ob_data[m]),
      .tgt_idx(ob_idx[m]), .busy(ob_busy[m])
    );
  end

  assign obuf_busy = |ob_busy;

  // ---------------- output mux (fixed priority) ----------------
  logic [1:0] osel;
  logic       oany;
  always_comb begin
    osel = '0;
    oany = 1'b0;
    for (int m = N_MCA - 1; m >= 0; m--)
      if (ob_valid[m]) begin osel = 2'(m); oany = 1'b1; end
  end

  target_t cur_tgt;
  assign cur_tgt      = tgt[osel];
  assign sw_out_valid = oany && !cur_tgt.to_io;
  assign sw_out.data  = ob_data[osel];
  assign sw_out.addr  = sw_addr_t'(cur_tgt.addr[7:0]);
  assign io_out_valid = oany && cur_tgt.to_io;
  assign io_out_addr  = cur_tgt.addr;
  assign io_out_data  = ob_data[osel];

  always_comb begin
    ob_ready = '0;
    ob_ready[osel] = oany && (cur_tgt.to_io ? io_out_ready : sw_out_ready);
  end

  // ---------------- current control unit ----------------
  ccu u_ccu (
    .clk, .rst_n, .tx_en, .tx_sel, .c_loc, .cur_valid(cur_valid[tx_sel]),
    .req_in, .wait_out, .i_out, .clear_served(release_w), .served,
    .need_ext, .req_out, .wait_in, .c_ext_in, .c_ext, .ext_ok
  );

endmodule
