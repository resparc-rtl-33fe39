// resparc_top -- RESPARC core: a pool of NeuroCells around a shared IO bus.
//
// NCX x NCY NeuroCells (each 4x4 mPEs of four 64x64 crossbars) share the
// global IO bus, which connects them to the input memory. The Global
// Control Unit reads input spike packets from the memory, drops all-zero
// ones, broadcasts the others to the NeuroCells of a layer by tag, starts
// NeuroCells and waits for their event flags; NeuroCell outputs travel back
// over the bus into the memory, which is the only path between NeuroCells.
//
// Host interface (all synchronous to clk):
//   cfg    configuration write: nc = 15 addresses the global control unit
//          (command table, N_TS, TS_STRIDE), otherwise NeuroCell nc, unit
//          and register as in neurocell / mpe / prog_switch / lcu.
//   wprog  writes one crossbar conductance (offline programming).
//   start  begins a run; done pulses at its end; busy in between.
//   mem_*  host port of the input memory, used while the core is idle
//          (writes of input spike trains, reads of results).
// Statistics strobes: one pulse per event of each kind.
// The number of NeuroCells is not fixed by the architecture (it scales
// with the network); 2 x 2 is this design's default.
module resparc_top
  import resparc_pkg::*;
#(
  parameter int NCX = 2,
  parameter int NCY = 2,
  localparam int NNC = NCX * NCY
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  wprog_t              wprog,
  input  logic                start,
  output logic                busy,
  output logic                done,
  input  logic                mem_we,
  input  logic [SRAM_AW-1:0]  mem_waddr,
  input  logic [PKT_W-1:0]    mem_wdata,
  input  logic                mem_re,
  input  logic [SRAM_AW-1:0]  mem_raddr,
  output logic [PKT_W-1:0]    mem_rdata,
  // statistics strobes
  output logic                st_gcu_zero_skip,
  output logic [NNC-1:0]      st_nc_done,
  output logic [NNC-1:0]      st_sw_zero_drop,
  output logic [NNC-1:0]      st_sw_hop,
  output logic [NNC-1:0]      st_ccu_xfer,
  output logic [NNC-1:0]      st_route_err,
  output logic                st_bcast,
  output logic                st_bus_write
);

  // ---------------- global control ----------------
  logic                 g_rd_en, g_wr_en, nclear, bc_valid;
  logic [SRAM_AW-1:0]   g_rd_addr, g_wr_addr;
  logic [PKT_W-1:0]     g_wr_data, rd_data;
  io_bcast_t            bc;
  logic                 bw_valid, bw_ready;
  logic [SRAM_AW-1:0]   bw_addr;
  logic [PKT_W-1:0]     bw_data;
  logic [NNC-1:0]       nc_start, nc_done, event_flag;
  logic [15:0]          tstep;

  gcu #(.NCX(NCX), .NCY(NCY)) u_gcu (
    .clk, .rst_n,
    .cfg_we(cfg.we && cfg.nc == 4'hf), .cfg_addr(cfg.addr), .cfg_wdata(cfg.data),
    .start, .busy, .done, .nclear,
    .rd_en(g_rd_en), .rd_addr(g_rd_addr), .rd_data,
    .wr_en(g_wr_en), .wr_addr(g_wr_addr), .wr_data(g_wr_data),
    .bc_valid, .bc,
    .bus_wr_valid(bw_valid), .bus_wr_addr(bw_addr), .bus_wr_data(bw_data), .bus_wr_ready(bw_ready),
    .nc_start, .nc_done, .event_flag, .zero_skip(st_gcu_zero_skip), .tstep
  );

  // ---------------- input memory (host port while idle) ----------------
  input_sram u_sram (
    .clk,
    .wr_en  (busy ? g_wr_en   : mem_we),
    .wr_addr(busy ? g_wr_addr : mem_waddr),
    .wr_data(busy ? g_wr_data : mem_wdata),
    .rd_en  (busy ? g_rd_en   : mem_re),
    .rd_addr(busy ? g_rd_addr : mem_raddr),
    .rd_data
  );
  assign mem_rdata = rd_data;

  // ---------------- IO bus ----------------
  logic [NNC-1:0]              nin_v, nout_v, nout_r;
  logic [3:0]                  nin_mpe;
  logic [1:0]                  nin_mca;
  logic [PKT_W-1:0]            nin_data;
  logic [NNC-1:0][SRAM_AW-1:0] nout_addr;
  logic [NNC-1:0][PKT_W-1:0]   nout_data;

  io_bus #(.NCX(NCX), .NCY(NCY)) u_bus (
    .clk, .rst_n, .bc_valid, .bc,
    .nc_in_valid(nin_v), .nc_in_mpe(nin_mpe), .nc_in_mca(nin_mca), .nc_in_data(nin_data),
    .nc_out_valid(nout_v), .nc_out_addr(nout_addr), .nc_out_data(nout_data), .nc_out_ready(nout_r),
    .wr_valid(bw_valid), .wr_addr(bw_addr), .wr_data(bw_data), .wr_ready(bw_ready)
  );

  // ---------------- NeuroCells ----------------
  for (genvar n = 0; n < NNC; n++) begin : g_nc
    logic nc_busy;
    neurocell u_nc (
      .clk, .rst_n,
      .cfg_we(cfg.we && cfg.nc == 4'(n)), .cfg_unit(cfg.unit), .cfg_addr(cfg.addr), .cfg_wdata(cfg.data),
      .prog_we(wprog.we && wprog.nc == 4'(n)), .prog_mpe(wprog.mpe), .prog_mca(wprog.mca),
      .prog_row(wprog.row), .prog_col(wprog.col), .prog_g(wprog.g),
      .nclear, .start(nc_start[n]), .done(nc_done[n]), .busy(nc_busy),
      .io_in_valid(nin_v[n]), .io_in_mpe(nin_mpe), .io_in_mca(nin_mca), .io_in_data(nin_data),
      .io_out_valid(nout_v[n]), .io_out_addr(nout_addr[n]), .io_out_data(nout_data[n]),
      .io_out_ready(nout_r[n]),
      .ev_zero_drop(st_sw_zero_drop[n]), .ev_hop(st_sw_hop[n]), .ev_ccu(st_ccu_xfer[n]),
      .ev_route_err(st_route_err[n])
    );
  end

  assign st_nc_done   = nc_done;
  assign st_bcast     = bc_valid;
  assign st_bus_write = bw_valid && bw_ready;

endmodule
