// tb_resparc_top -- end-to-end run of the whole core at its default size
// (2 x 2 NeuroCells, 4x4 mPEs each, four 64x64 crossbars per mPE), four time
// steps of a small spiking network spread over all four NeuroCells:
//   NeuroCells 0 and 1 (tags (0,0), (1,0)) receive the same input word in one
//     broadcast and each computes a 64-neuron layer; their spikes go back to
//     the input memory over the IO bus.
//   NeuroCell 2 (tag (0,1)) runs a two-phase mapping: a switch-to-switch
//     hop between layers, an all-zero packet dropped by a switch, and a
//     neuron whose fan-in spans two mPEs (current lent over the gated wire).
//   NeuroCell 3 (tag (1,1)) reads the outputs of NeuroCells 0 and 1 from the
//     memory and integrates both crossbars by time multiplexing (degree 2).
//   An all-zero input word is skipped by the global zero-check.
// The memory contents after the run are compared with a model of weights
// and membranes; each mechanism is counted and must have happened.
module tb_resparc_top;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_wr_t cfg; wprog_t wprog;
  logic mem_we = 0, mem_re = 0; logic [SRAM_AW-1:0] mem_waddr = '0, mem_raddr = '0;
  logic [PKT_W-1:0] mem_wdata = '0, mem_rdata;
  logic st_gcu_zero_skip, st_bcast, st_bus_write;
  logic [3:0] st_nc_done, st_sw_zero_drop, st_sw_hop, st_ccu_xfer, st_route_err;
  int checks = 0, failures = 0;
  int n_skip = 0, n_zero = 0, n_hop = 0, n_ccu = 0, n_err = 0, n_bc = 0, n_multi = 0, n_wb = 0, n_tmux = 0, n_phase1 = 0;
  int n_done [4];
  localparam int NTS = 4, STRIDE = 16, VA = 240, VB = 480;

  resparc_top dut (.*);
  always #5 clk = ~clk;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input int nc, input int u, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg = '{we: 1'b1, nc: 4'(nc), unit: 5'(u), addr: a, data: d}; @(negedge clk); cfg.we = 0;
  endtask
  function automatic logic [31:0] tg(bit to_io, int a);
    return {21'd0, to_io, 10'(a)};
  endfunction
  function automatic logic [31:0] gc(cmd_op_e op, int a, int xl, int xh, int yl, int yh, int m, int c);
    gcmd_t g; g.op = op; g.sram_addr = SRAM_AW'(a); g.x_lo = 2'(xl); g.x_hi = 2'(xh); g.y_lo = 2'(yl); g.y_hi = 2'(yh);
    g.mpe = 4'(m); g.mca = 2'(c); return 32'(g);
  endfunction

  // weights: wt[k] for (nc, mpe, mca) slots used below
  typedef logic [3:0] wmat_t [MCA_N][MCA_N];
  wmat_t wt [7];
  int slot_nc [7] = '{0, 1, 2, 2, 2, 2, 3};
  int slot_mpe[7] = '{0, 0, 0, 3, 5, 6, 0};
  int slot_mca[7] = '{0, 0, 0, 1, 0, 0, 0};
  wmat_t w3b;   // NeuroCell 3, mPE 0, MCA 1
  logic [PKT_W-1:0] mem_model [1 << SRAM_AW];
  bit               mem_known [1 << SRAM_AW];

  always @(posedge clk) if (rst_n) begin
    if (st_gcu_zero_skip) n_skip++;
    if (st_bcast) begin n_bc++; if ($countones(dut.nin_v) > 1) n_multi++; end
    if (st_bus_write) n_wb++;
    n_zero += $countones(st_sw_zero_drop);
    n_hop  += $countones(st_sw_hop);
    n_ccu  += $countones(st_ccu_xfer);
    n_err  += $countones(st_route_err);
    for (int n = 0; n < 4; n++) if (st_nc_done[n]) n_done[n]++;
    if (dut.g_nc[3].u_nc.g_mpe[0].u_mpe.u_lcu.integ_en[0] && dut.g_nc[3].u_nc.g_mpe[0].u_mpe.u_lcu.step == 3'd1) n_tmux++;
    if (dut.g_nc[2].u_nc.phase_go && dut.g_nc[2].u_nc.phase == 2'd1) n_phase1++;
  end

  initial begin
    int v [7][MCA_N];
    cfg = '0; wprog = '0;
    for (int n = 0; n < 4; n++) n_done[n] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- crossbars ----
    for (int k = 0; k < 7; k++)
      for (int r = 0; r < MCA_N; r++) for (int c = 0; c < MCA_N; c++) begin
        wt[k][r][c] = 4'($urandom);
        @(negedge clk);
        wprog = '{we: 1'b1, nc: 4'(slot_nc[k]), mpe: 4'(slot_mpe[k]), mca: 2'(slot_mca[k]), row: 6'(r), col: 6'(c), g: wt[k][r][c]};
      end
    for (int r = 0; r < MCA_N; r++) for (int c = 0; c < MCA_N; c++) begin
      w3b[r][c] = 4'($urandom);
      @(negedge clk); wprog = '{we: 1'b1, nc: 4'd3, mpe: 4'd0, mca: 2'd1, row: 6'(r), col: 6'(c), g: w3b[r][c]};
    end
    @(negedge clk); wprog = '0;
    // ---- NeuroCells 0 and 1: one layer, output to memory 0x100 / 0x101 ----
    for (int n = 0; n < 2; n++) begin
      wr(n, 0, 8'h00, {26'd0, 3'd1, 2'd0, 1'b1}); wr(n, 0, 8'h02, VA);
      wr(n, 0, 8'h08, 32'b11); wr(n, 0, 8'h10, SRC_C1);
      wr(n, 0, 8'h40, tg(1, 10'h100 + n)); wr(n, 0, 8'h60, 1);
      wr(n, 31, 8'h00, 1);
    end
    // ---- NeuroCell 2: two phases, hop, zero drop, lent current ----
    wr(2, 0, 8'h00, {26'd0, 3'd1, 2'd0, 1'b1}); wr(2, 0, 8'h02, VA);
    wr(2, 0, 8'h08, 32'b11); wr(2, 0, 8'h0a, 32'b10);
    wr(2, 0, 8'h10, SRC_C1); wr(2, 0, 8'h20, SRC_C3);
    wr(2, 0, 8'h40, tg(0, {4'd2, 2'd1, 2'd1})); wr(2, 0, 8'h60, 1);
    wr(2, 0, 8'h48, tg(0, {4'd2, 2'd1, 2'd2})); wr(2, 0, 8'h62, 1);
    wr(2, 3, 8'h00, {26'd0, 3'd1, 2'd1, 1'b1}); wr(2, 3, 8'h02, VA);
    wr(2, 3, 8'h09, 32'b10); wr(2, 3, 8'h18, SRC_C2);
    wr(2, 3, 8'h44, tg(1, 10'h200)); wr(2, 3, 8'h61, 1);
    wr(2, 5, 8'h00, {26'd0, 3'd0, 2'd0, 1'b1}); wr(2, 5, 8'h01, 32'b0_00_1); wr(2, 5, 8'h08, 32'b01);
    wr(2, 6, 8'h00, {26'd0, 3'd2, 2'd0, 1'b1}); wr(2, 6, 8'h01, {26'd0, 2'd3, 1'b1, 3'd0}); wr(2, 6, 8'h02, VB);
    wr(2, 6, 8'h08, 32'b11); wr(2, 6, 8'h10, SRC_C1); wr(2, 6, 8'h11, SRC_CEXT);
    wr(2, 6, 8'h40, tg(1, 10'h201)); wr(2, 6, 8'h60, 1);
    wr(2, 16, 8'h00, 32'b0001); wr(2, 18, 8'h00, 32'b0010); wr(2, 20, 8'h00, 32'b0001);
    wr(2, 31, 8'h00, 2);
    // ---- NeuroCell 3: next layer from memory, degree-2 time multiplexing ----
    wr(3, 0, 8'h00, {26'd0, 3'd2, 2'd0, 1'b1}); wr(3, 0, 8'h02, VB);
    wr(3, 0, 8'h08, 32'b11); wr(3, 0, 8'h09, 32'b01);
    wr(3, 0, 8'h10, SRC_C1); wr(3, 0, 8'h11, SRC_C2);
    wr(3, 0, 8'h40, tg(1, 10'h300)); wr(3, 0, 8'h60, 1);
    wr(3, 31, 8'h00, 1);
    // ---- global command table ----
    wr(15, 0, 8'd0,  gc(CMD_BCAST, 10'h000, 0, 1, 0, 0, 0, 0));
    wr(15, 0, 8'd1,  gc(CMD_BCAST, 10'h001, 0, 0, 1, 1, 0, 1));
    wr(15, 0, 8'd2,  gc(CMD_BCAST, 10'h002, 0, 0, 1, 1, 0, 0));
    wr(15, 0, 8'd3,  gc(CMD_BCAST, 10'h003, 0, 0, 1, 1, 5, 0));
    wr(15, 0, 8'd4,  gc(CMD_BCAST, 10'h004, 0, 0, 1, 1, 6, 0));
    wr(15, 0, 8'd5,  gc(CMD_RUN,   0,       0, 1, 0, 0, 0, 0));
    wr(15, 0, 8'd6,  gc(CMD_RUN,   0,       0, 0, 1, 1, 0, 0));
    wr(15, 0, 8'd7,  gc(CMD_BCAST, 10'h100, 1, 1, 1, 1, 0, 0));
    wr(15, 0, 8'd8,  gc(CMD_BCAST, 10'h101, 1, 1, 1, 1, 0, 1));
    wr(15, 0, 8'd9,  gc(CMD_RUN,   0,       1, 1, 1, 1, 0, 0));
    wr(15, 0, 8'd10, gc(CMD_END,   0,       0, 0, 0, 0, 0, 0));
    wr(15, 0, 8'h40, NTS); wr(15, 0, 8'h41, STRIDE);
    // ---- input spike trains ----
    for (int a = 0; a < (1 << SRAM_AW); a++) mem_known[a] = 0;
    for (int t = 0; t < NTS; t++)
      for (int k = 0; k < 5; k++) begin
        logic [PKT_W-1:0] d;
        d = (k == 1) ? '0 : {$urandom, $urandom};
        @(negedge clk); mem_we = 1; mem_waddr = SRAM_AW'(t * STRIDE + k); mem_wdata = d;
        mem_model[t * STRIDE + k] = d;
      end
    @(negedge clk); mem_we = 0;
    // ---- model ----
    for (int k = 0; k < 7; k++) for (int c = 0; c < MCA_N; c++) v[k][c] = 0;
    for (int t = 0; t < NTS; t++) begin
      logic [PKT_W-1:0] in0, in2, in3, in4, s [7];
      in0 = mem_model[t * STRIDE]; in2 = mem_model[t * STRIDE + 2];
      in3 = mem_model[t * STRIDE + 3]; in4 = mem_model[t * STRIDE + 4];
      for (int c = 0; c < MCA_N; c++) begin
        for (int r = 0; r < MCA_N; r++) begin
          if (in0[r]) begin v[0][c] += wt[0][r][c]; v[1][c] += wt[1][r][c]; end
          if (in2[r]) v[2][c] += wt[2][r][c];
          if (in4[r]) v[5][c] += wt[5][r][c];
          if (in3[r]) v[5][c] += wt[4][r][c];
        end
        for (int k = 0; k < 6; k++) if (k != 3 && k != 4) begin
          s[k][c] = v[k][c] >= ((k == 5) ? VB : VA); if (s[k][c]) v[k][c] = 0;
        end
      end
      for (int c = 0; c < MCA_N; c++) begin
        for (int r = 0; r < MCA_N; r++) if (s[2][r]) v[3][c] += wt[3][r][c];
        s[3][c] = v[3][c] >= VA; if (s[3][c]) v[3][c] = 0;
        for (int r = 0; r < MCA_N; r++) begin
          if (s[0][r]) v[6][c] += wt[6][r][c];
          if (s[1][r]) v[6][c] += w3b[r][c];
        end
        s[6][c] = v[6][c] >= VB; if (s[6][c]) v[6][c] = 0;
      end
      mem_model[t * STRIDE + 10'h100] = s[0]; mem_known[t * STRIDE + 10'h100] = 1;
      mem_model[t * STRIDE + 10'h101] = s[1]; mem_known[t * STRIDE + 10'h101] = 1;
      mem_model[t * STRIDE + 10'h200] = s[3]; mem_known[t * STRIDE + 10'h200] = 1;
      mem_model[t * STRIDE + 10'h201] = s[5]; mem_known[t * STRIDE + 10'h201] = 1;
      mem_model[t * STRIDE + 10'h300] = s[6]; mem_known[t * STRIDE + 10'h300] = 1;
    end
    // ---- run ----
    begin
      int cyc; cyc = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done && cyc < 20000) begin @(posedge clk); cyc++; end
      chk(done, "run completes");
      $display("run of %0d time steps: %0d cycles", NTS, cyc);
    end
    // ---- results ----
    for (int a = 0; a < (1 << SRAM_AW); a++) if (mem_known[a]) begin
      @(negedge clk); mem_re = 1; mem_raddr = SRAM_AW'(a);
      @(negedge clk); mem_re = 0;
      chk(mem_rdata == mem_model[a], $sformatf("memory word 0x%0h", a));
    end
    $display("events: skip=%0d sw_zero=%0d hop=%0d ccu=%0d bcast=%0d multi=%0d writes=%0d tmux=%0d phase1=%0d",
             n_skip, n_zero, n_hop, n_ccu, n_bc, n_multi, n_wb, n_tmux, n_phase1);
    chk(n_skip >= NTS, "global zero-check skipped words");
    chk(n_zero >= NTS, "switch zero-check dropped packets");
    chk(n_hop >= 1, "switch-to-switch hop");
    chk(n_ccu == NTS, "current lent over the gated wire");
    chk(n_multi == NTS, "one broadcast reached two NeuroCells");
    chk(n_wb == 5 * NTS, "write-backs over the IO bus");
    chk(n_tmux == NTS, "time-multiplexed second step");
    chk(n_phase1 == NTS, "second layer phase");
    chk(n_err == 0, "no routing error");
    for (int n = 0; n < 4; n++) chk(n_done[n] == NTS, $sformatf("NeuroCell %0d event flag each step", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
