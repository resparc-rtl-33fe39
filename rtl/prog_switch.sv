// prog_switch -- programmable switch of the NeuroCell switch network.
//
// A switch sits between four mPEs (lines 0..3: top-left, top-right,
// bottom-left, bottom-right corner) and has a dedicated line to each other
// switch in its row (lines 4,5, in increasing column order) and in its
// column (lines 6,7, in increasing row order), so any two mPEs served by
// switches in the same row or column exchange a packet in one switch-to-
// switch hop. Every input line has a one-entry data + address buffer
// (iData / iAddress) and every output line a one-entry oData / oAddress
// buffer; a decoder maps each buffered packet to an output line and a
// round-robin arbiter per output line picks one of the competing inputs.
//
// Address formats: a packet from an mPE carries iAddress {SW_ID, mPE_ID,
// MCA_ID}. If SW_ID is this switch it goes to the mPE line mPE_ID with
// oAddress {MCA_ID}; otherwise to the line of switch SW_ID with oAddress
// {mPE_ID, MCA_ID}. A packet arriving from another switch is for this
// switch, so it goes to mPE line mPE_ID. Unused address fields are zero.
// A destination switch in neither the row nor the column is a routing
// error: the packet is dropped and route_err pulses.
//
// Zero-check: an all-zero spike packet is accepted and discarded at the
// input (zero_drop pulses), so no transfer happens for it.
// Configuration: register 0 bits [3:0] = mPE lines this switch serves; an
// mPE line that is not served is not accepted from (its ready stays low).
// Handshake valid/ready on every line; an input buffer accepts a new packet
// when empty, so one line carries at most one packet every two cycles.
module prog_switch
  import resparc_pkg::*;
#(
  parameter int ROW = 0,
  parameter int COL = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [7:0]               cfg_addr,
  input  logic [31:0]              cfg_wdata,
  input  logic    [SW_LINES-1:0]   in_valid,
  input  sw_pkt_t [SW_LINES-1:0]   in_pkt,
  output logic    [SW_LINES-1:0]   in_ready,
  output logic    [SW_LINES-1:0]   out_valid,
  output sw_pkt_t [SW_LINES-1:0]   out_pkt,
  input  logic    [SW_LINES-1:0]   out_ready,
  output logic                     idle,
  output logic                     zero_drop,
  output logic                     route_err
);

  localparam int MYID = ROW * SW_DIM + COL;
  localparam int LW   = $clog2(SW_LINES);

  logic [3:0] serve;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         serve <= '0;
    else if (cfg_we && cfg_addr == '0)  serve <= cfg_wdata[3:0];
  end

  // ---------------- input buffers ----------------
  logic    [SW_LINES-1:0] ib_v;
  sw_pkt_t [SW_LINES-1:0] ib;
  logic    [SW_LINES-1:0] ib_take;   // granted this cycle
  logic    [SW_LINES-1:0] accept, is_zero;

  always_comb begin
    for (int i = 0; i < SW_LINES; i++) begin
      in_ready[i] = !ib_v[i] && (i >= 4 || serve[i]);
      accept[i]   = in_valid[i] && in_ready[i];
      is_zero[i]  = (in_pkt[i].data == '0);
    end
  end

  // ---------------- decoder ----------------
  logic [SW_LINES-1:0][LW-1:0] dest;
  logic [SW_LINES-1:0]         bad;
  sw_addr_t [SW_LINES-1:0]     oaddr;

  always_comb begin
    int s, r, c;
    s = 0; r = 0; c = 0;
    for (int i = 0; i < SW_LINES; i++) begin
      s = int'(ib[i].addr.sw_id);
      r = s / SW_DIM;
      c = s % SW_DIM;
      bad[i]   = 1'b0;
      dest[i]  = LW'(ib[i].addr.mpe_id);
      oaddr[i] = '0;
      oaddr[i].mca_id = ib[i].addr.mca_id;
      if (i < 4 && s != MYID) begin
        oaddr[i].mpe_id = ib[i].addr.mpe_id;
        if (s >= N_SW)        bad[i] = 1'b1;
        else if (r == ROW)    dest[i] = LW'(4 + ((c < COL) ? c : c - 1));
        else if (c == COL)    dest[i] = LW'(6 + ((r < ROW) ? r : r - 1));
        else                  bad[i] = 1'b1;
      end
    end
  end

  // ---------------- arbitration and output buffers ----------------
  logic    [SW_LINES-1:0]         ob_v;
  sw_pkt_t [SW_LINES-1:0]         ob;
  logic    [SW_LINES-1:0][LW-1:0] rr;        // last granted input per output
  logic    [SW_LINES-1:0]         gnt_v;
  logic    [SW_LINES-1:0][LW-1:0] gnt;

  always_comb begin
    int i;
    i = 0;
    ib_take = '0;
    for (int o = 0; o < SW_LINES; o++) begin
      gnt_v[o] = 1'b0;
      gnt[o]   = '0;
      if (!ob_v[o] || out_ready[o]) begin
        for (int k = 1; k <= SW_LINES; k++) begin
          i = (int'(rr[o]) + k) % SW_LINES;
          if (!gnt_v[o] && ib_v[i] && !bad[i] && int'(dest[i]) == o) begin
            gnt_v[o] = 1'b1;
            gnt[o]   = LW'(i);
          end
        end
      end
      if (gnt_v[o]) ib_take[gnt[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ib_v <= '0; ib <= '0; ob_v <= '0; ob <= '0; rr <= '0;
    end else begin
      for (int i = 0; i < SW_LINES; i++) begin
        if (ib_take[i] || (ib_v[i] && bad[i])) ib_v[i] <= 1'b0;
        if (accept[i] && !is_zero[i]) begin
          ib_v[i] <= 1'b1;
          ib[i]   <= in_pkt[i];
        end
      end
      for (int o = 0; o < SW_LINES; o++) begin
        if (gnt_v[o]) begin
          ob_v[o]      <= 1'b1;
          ob[o].data   <= ib[gnt[o]].data;
          ob[o].addr   <= oaddr[gnt[o]];
          rr[o]        <= gnt[o];
        end else if (out_ready[o]) begin
          ob_v[o] <= 1'b0;
        end
      end
    end
  end

  assign out_valid = ob_v;
  assign out_pkt   = ob;
  assign idle      = (ib_v == '0) && (ob_v == '0);

  always_comb begin
    zero_drop = 1'b0;
    route_err = 1'b0;
    for (int i = 0; i < SW_LINES; i++) begin
      if (accept[i] && is_zero[i]) zero_drop = 1'b1;
      if (ib_v[i] && bad[i])       route_err = 1'b1;
    end
  end

endmodule
