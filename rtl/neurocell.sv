// neurocell -- NeuroCell: a 4x4 array of mPEs and a 3x3 switch network.
//
// Switch (sr,sc) sits between mPEs (sr,sc), (sr,sc+1), (sr+1,sc) and
// (sr+1,sc+1), its corner lines 0..3, and has dedicated lines to the other
// switches of its row and column (see prog_switch). An mPE's SW_Out goes to
// all its adjacent switches; the switches' serve registers decide which one
// takes it (configure exactly one). An mPE's SW_In merges the corner lines
// of its adjacent switches, first valid one first.
//
// Neighbouring mPEs are joined by gated current wires: an mPE with rx_en
// takes C_ext from its neighbour in direction rx_dir (0 north, 1 east,
// 2 south, 3 west) and the request / wait pair of the two CCUs is wired
// between them.
//
// Layer phases: the layers mapped on one NeuroCell are evaluated in order.
// start begins phase 0: every enabled mPE of layer 0 runs once; when all
// mPEs are idle, the switches are empty and no output towards the IO bus is
// pending, the next phase starts; after the last one (register NC_CTRL) done
// pulses, which sets this NeuroCell's event flag in the global control.
// Spike packets addressed to_io leave through io_out (fixed priority over
// the mPEs) towards the global IO bus; io_in delivers IO bus packets.
// Configuration: unit 0..15 mPE (row-major), 16..24 switch (row-major),
// 31 NeuroCell control: register 0 bits [2:0] = number of phases (1..4).
// The phase ordering and the completion rule are this design's choices.
module neurocell
  import resparc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [4:0]           cfg_unit,
  input  logic [7:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  input  logic                 prog_we,
  input  logic [3:0]           prog_mpe,
  input  logic [1:0]           prog_mca,
  input  logic [5:0]           prog_row,
  input  logic [5:0]           prog_col,
  input  logic [W_BITS-1:0]    prog_g,
  input  logic                 nclear,
  input  logic                 start,
  output logic                 done,
  output logic                 busy,
  input  logic                 io_in_valid,
  input  logic [3:0]           io_in_mpe,
  input  logic [1:0]           io_in_mca,
  input  logic [PKT_W-1:0]     io_in_data,
  output logic                 io_out_valid,
  output logic [SRAM_AW-1:0]   io_out_addr,
  output logic [PKT_W-1:0]     io_out_data,
  input  logic                 io_out_ready,
  // activity strobes (for statistics)
  output logic                 ev_zero_drop,
  output logic                 ev_hop,
  output logic                 ev_ccu,
  output logic                 ev_route_err
);

  // ---------------- mPE array ----------------
  logic    [N_MPE-1:0]          m_busy, m_sw_out_v, m_sw_out_r, m_sw_in_v;
  sw_pkt_t [N_MPE-1:0]          m_sw_out;
  logic    [N_MPE-1:0][1:0]     m_sw_in_mca;
  logic    [N_MPE-1:0][PKT_W-1:0] m_sw_in_data;
  logic    [N_MPE-1:0]          m_io_v, m_io_r;
  logic    [N_MPE-1:0][SRAM_AW-1:0] m_io_addr;
  logic    [N_MPE-1:0][PKT_W-1:0]   m_io_data;
  logic    [N_MPE-1:0]          m_tx_en, m_rx_en, m_req_in, m_wait_out, m_req_out, m_wait_in;
  logic    [N_MPE-1:0][1:0]     m_rx_dir;
  logic    [N_MPE-1:0][MCA_N-1:0][CUR_W-1:0] m_i_out, m_c_ext;

  logic       phase_go;
  logic [1:0] phase;

  for (genvar j = 0; j < N_MPE; j++) begin : g_mpe
    mpe u_mpe (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_unit == 5'(j)), .cfg_addr, .cfg_wdata,
      .prog_we(prog_we && prog_mpe == 4'(j)), .prog_mca, .prog_row, .prog_col, .prog_g,
      .nclear, .phase_go, .phase, .busy(m_busy[j]),
      .io_in_valid(io_in_valid && io_in_mpe == 4'(j)), .io_in_mca, .io_in_data,
      .sw_in_valid(m_sw_in_v[j]), .sw_in_mca(m_sw_in_mca[j]), .sw_in_data(m_sw_in_data[j]),
      .sw_out_valid(m_sw_out_v[j]), .sw_out(m_sw_out[j]), .sw_out_ready(m_sw_out_r[j]),
      .io_out_valid(m_io_v[j]), .io_out_addr(m_io_addr[j]), .io_out_data(m_io_data[j]),
      .io_out_ready(m_io_r[j]),
      .tx_en(m_tx_en[j]), .rx_en(m_rx_en[j]), .rx_dir(m_rx_dir[j]),
      .req_in(m_req_in[j]), .wait_out(m_wait_out[j]), .i_out(m_i_out[j]),
      .req_out(m_req_out[j]), .wait_in(m_wait_in[j]), .c_ext_in(m_c_ext[j])
    );
  end

  // ---------------- gated current wires between neighbours ----------------
  function automatic int nbr(int j, logic [1:0] dir);
    int r, c;
    r = j / NC_DIM;
    c = j % NC_DIM;
    case (dir)
      2'd0:    return (r > 0)          ? j - NC_DIM : -1;
      2'd1:    return (c < NC_DIM - 1) ? j + 1      : -1;
      2'd2:    return (r < NC_DIM - 1) ? j + NC_DIM : -1;
      default: return (c > 0)          ? j - 1      : -1;
    endcase
  endfunction

  always_comb begin
    m_req_in  = '0;
    m_wait_in = '1;
    for (int j = 0; j < N_MPE; j++) begin
      m_c_ext[j] = '0;
      for (int d = 0; d < 4; d++) begin
        if (m_rx_en[j] && m_rx_dir[j] == 2'(d) && nbr(j, 2'(d)) >= 0) begin
          m_wait_in[j] = m_wait_out[nbr(j, 2'(d))];
          m_c_ext[j]   = m_i_out[nbr(j, 2'(d))];
          if (m_req_out[j]) m_req_in[nbr(j, 2'(d))] = 1'b1;
        end
      end
    end
  end

  assign ev_ccu = |(m_req_in & ~m_wait_out);

  // ---------------- switch network ----------------
  logic    [N_SW-1:0][SW_LINES-1:0] s_in_v, s_in_r, s_out_v, s_out_r;
  sw_pkt_t [N_SW-1:0][SW_LINES-1:0] s_in_p, s_out_p;
  logic    [N_SW-1:0]               s_idle, s_zero, s_err;

  for (genvar sr = 0; sr < SW_DIM; sr++) begin : g_sr
    for (genvar sc = 0; sc < SW_DIM; sc++) begin : g_sc
      localparam int S = sr * SW_DIM + sc;
      prog_switch #(.ROW(sr), .COL(sc)) u_sw (
        .clk, .rst_n,
        .cfg_we(cfg_we && cfg_unit == 5'(16 + S)), .cfg_addr, .cfg_wdata,
        .in_valid(s_in_v[S]), .in_pkt(s_in_p[S]), .in_ready(s_in_r[S]),
        .out_valid(s_out_v[S]), .out_pkt(s_out_p[S]), .out_ready(s_out_r[S]),
        .idle(s_idle[S]), .zero_drop(s_zero[S]), .route_err(s_err[S])
      );
    end
  end

  // index of the line of switch `peer` that leads back to switch `s`
  function automatic int back_line(int s, int peer);
    int r, c, pr, pc;
    r = s / SW_DIM;  c = s % SW_DIM;
    pr = peer / SW_DIM; pc = peer % SW_DIM;
    if (r == pr) return 4 + ((c < pc) ? c : c - 1);
    else         return 6 + ((r < pr) ? r : r - 1);
  endfunction

  always_comb begin
    s_in_v = '0;
    s_in_p = '0;
    s_out_r = '0;
    m_sw_out_r = '0;
    m_sw_in_v = '0;
    m_sw_in_mca = '0;
    m_sw_in_data = '0;
    for (int s = 0; s < N_SW; s++) begin
      int sr, sc;
      sr = s / SW_DIM;
      sc = s % SW_DIM;
      // corner lines: mPE -> switch
      for (int k = 0; k < 4; k++) begin
        int j;
        j = (sr + k / 2) * NC_DIM + sc + k % 2;
        s_in_v[s][k] = m_sw_out_v[j];
        s_in_p[s][k] = m_sw_out[j];
        if (s_in_r[s][k]) m_sw_out_r[j] = 1'b1;
      end
      // switch-to-switch lines
      for (int l = 0; l < 4; l++) begin
        int peer;
        if (l < 2) peer = sr * SW_DIM + ((l < sc) ? l : l + 1);
        else       peer = (((l - 2) < sr) ? (l - 2) : (l - 1)) * SW_DIM + sc;
        s_in_v[peer][back_line(s, peer)] = s_out_v[s][4 + l];
        s_in_p[peer][back_line(s, peer)] = s_out_p[s][4 + l];
        s_out_r[s][4 + l]                = s_in_r[peer][back_line(s, peer)];
      end
    end
    // corner lines: switch -> mPE, first valid adjacent switch wins
    for (int j = 0; j < N_MPE; j++) begin
      int r, c;
      r = j / NC_DIM;
      c = j % NC_DIM;
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          int sr, sc, k;
          sr = r - 1 + a;
          sc = c - 1 + b;
          k  = (1 - a) * 2 + (1 - b);
          if (sr >= 0 && sr < SW_DIM && sc >= 0 && sc < SW_DIM && !m_sw_in_v[j]
              && s_out_v[sr * SW_DIM + sc][k]) begin
            m_sw_in_v[j]    = 1'b1;
            m_sw_in_mca[j]  = s_out_p[sr * SW_DIM + sc][k].addr.mca_id;
            m_sw_in_data[j] = s_out_p[sr * SW_DIM + sc][k].data;
            s_out_r[sr * SW_DIM + sc][k] = 1'b1;
          end
        end
    end
  end

  always_comb begin
    ev_hop = 1'b0;
    for (int s = 0; s < N_SW; s++)
      for (int l = 4; l < SW_LINES; l++)
        if (s_out_v[s][l] && s_out_r[s][l]) ev_hop = 1'b1;
  end
  assign ev_zero_drop = |s_zero;
  assign ev_route_err = |s_err;

  // ---------------- output towards the IO bus ----------------
  logic [3:0] io_sel;
  always_comb begin
    io_sel       = '0;
    io_out_valid = 1'b0;
    for (int j = N_MPE - 1; j >= 0; j--)
      if (m_io_v[j]) begin
        io_sel       = 4'(j);
        io_out_valid = 1'b1;
      end
  end
  assign io_out_addr = m_io_addr[io_sel];
  assign io_out_data = m_io_data[io_sel];
  always_comb begin
    m_io_r         = '0;
    m_io_r[io_sel] = io_out_valid && io_out_ready;
  end

  // ---------------- phase controller ----------------
  typedef enum logic [1:0] {P_IDLE, P_GO, P_HOLD, P_WAIT} pstate_e;
  pstate_e    pst;
  logic [2:0] n_phases;
  logic       quiet;

  assign quiet    = (m_busy == '0) && (s_idle == '1) && (m_io_v == '0);
  assign phase_go = (pst == P_GO);
  assign busy     = (pst != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst      <= P_IDLE;
      phase    <= '0;
      n_phases <= 3'd1;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cfg_we && cfg_unit == 5'd31 && cfg_addr == '0) n_phases <= cfg_wdata[2:0];
      unique case (pst)
        P_IDLE: if (start) begin phase <= '0; pst <= P_GO; end
        P_GO:   pst <= P_HOLD;
        P_HOLD: pst <= P_WAIT;
        P_WAIT: if (quiet) begin
                  if (3'(phase) + 3'd1 >= n_phases) begin
                    done <= 1'b1;
                    pst  <= P_IDLE;
                  end else begin
                    phase <= phase + 2'd1;
                    pst   <= P_GO;
                  end
                end
        default: pst <= P_IDLE;
      endcase
    end
  end

endmodule
