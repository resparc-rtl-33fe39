// tb_neurocell -- a small two-layer network on one NeuroCell, two time steps.
//  phase 0: mPE 0 (row 0, col 0) fires from an IO input; its packet goes
//           through switch 0 and, one switch-to-switch hop along row 0, to
//           switch 2, which delivers it to MCA 1 of mPE 3 (row 0, col 3).
//           mPE 0's second lane fires an all-zero packet that the switch
//           drops (zero-check).
//           mPE 6 (row 1, col 2) integrates its own crossbar and then the
//           current lent by its west neighbour mPE 5 over the gated wire.
//  phase 1: mPE 3 fires; mPE 3 and mPE 6 write their packets to the IO side.
// The expected packets come from a model of the weights and membranes.
module tb_neurocell;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [4:0] cfg_unit = '0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic prog_we = 0; logic [3:0] prog_mpe = '0; logic [1:0] prog_mca = '0; logic [5:0] prog_row = '0, prog_col = '0; logic [3:0] prog_g = '0;
  logic nclear = 0, start = 0, done, busy;
  logic io_in_valid = 0; logic [3:0] io_in_mpe = '0; logic [1:0] io_in_mca = '0; logic [PKT_W-1:0] io_in_data = '0;
  logic io_out_valid, io_out_ready = 1; logic [SRAM_AW-1:0] io_out_addr; logic [PKT_W-1:0] io_out_data;
  logic ev_zero_drop, ev_hop, ev_ccu, ev_route_err;
  int checks = 0, failures = 0, n_zero = 0, n_hop = 0, n_ccu = 0, n_err = 0;
  logic [3:0] w0 [MCA_N][MCA_N], w3 [MCA_N][MCA_N], w5 [MCA_N][MCA_N], w6 [MCA_N][MCA_N];
  int v0 [MCA_N], v3 [MCA_N], v6 [MCA_N];
  localparam int VA = 240, VB = 480;
  logic [PKT_W-1:0] got55, got66; int n55, n66;

  neurocell dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input int u, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_unit = 5'(u); cfg_addr = a; cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask
  task automatic io(input int m, input int c, input logic [PKT_W-1:0] d);
    @(negedge clk); io_in_valid = 1; io_in_mpe = 4'(m); io_in_mca = 2'(c); io_in_data = d; @(negedge clk); io_in_valid = 0;
  endtask
  task automatic prog(input int m, input int c, input int r, input int col, input logic [3:0] g);
    @(negedge clk); prog_we = 1; prog_mpe = 4'(m); prog_mca = 2'(c); prog_row = 6'(r); prog_col = 6'(col); prog_g = g;
  endtask
  function automatic logic [31:0] tg(bit to_io, int a);
    return {21'd0, to_io, 10'(a)};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (ev_zero_drop) n_zero++;
    if (ev_hop) n_hop++;
    if (ev_ccu) n_ccu++;
    if (ev_route_err) n_err++;
    if (io_out_valid && io_out_ready) begin
      if (io_out_addr == 10'h055) begin got55 = io_out_data; n55++; end
      else if (io_out_addr == 10'h066) begin got66 = io_out_data; n66++; end
      else chk(0, "unexpected IO address");
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < MCA_N; r++) for (int c = 0; c < MCA_N; c++) begin
      w0[r][c] = 4'($urandom); prog(0, 0, r, c, w0[r][c]);
      w3[r][c] = 4'($urandom); prog(3, 1, r, c, w3[r][c]);
      w5[r][c] = 4'($urandom); prog(5, 0, r, c, w5[r][c]);
      w6[r][c] = 4'($urandom); prog(6, 0, r, c, w6[r][c]);
    end
    @(negedge clk); prog_we = 0;
    // mPE 0: layer 0, degree 1; lane 0 from IO -> mPE 3 lane 1; lane 2 fires zeros
    wr(0, 8'h00, {26'd0, 3'd1, 2'd0, 1'b1}); wr(0, 8'h02, VA);
    wr(0, 8'h08, 32'b11); wr(0, 8'h0a, 32'b10);
    wr(0, 8'h10, SRC_C1); wr(0, 8'h20, SRC_C3);
    wr(0, 8'h40, tg(0, {4'd2, 2'd1, 2'd1})); wr(0, 8'h60, 1);
    wr(0, 8'h48, tg(0, {4'd2, 2'd1, 2'd2})); wr(0, 8'h62, 1);
    // mPE 3: layer 1; lane 1 from the switch network -> IO 0x55
    wr(3, 8'h00, {26'd0, 3'd1, 2'd1, 1'b1}); wr(3, 8'h02, VA);
    wr(3, 8'h09, 32'b10); wr(3, 8'h18, SRC_C2);
    wr(3, 8'h44, tg(1, 10'h055)); wr(3, 8'h61, 1);
    // mPE 5: layer 0, degree 0, lends MCA 1's current
    wr(5, 8'h00, {26'd0, 3'd0, 2'd0, 1'b1}); wr(5, 8'h01, 32'b0_00_1); wr(5, 8'h08, 32'b01);
    // mPE 6: layer 0, degree 2 (own C1, then C_ext from the west) -> IO 0x66
    wr(6, 8'h00, {26'd0, 3'd2, 2'd0, 1'b1}); wr(6, 8'h01, {26'd0, 2'd3, 1'b1, 3'd0}); wr(6, 8'h02, VB);
    wr(6, 8'h08, 32'b11); wr(6, 8'h10, SRC_C1); wr(6, 8'h11, SRC_CEXT);
    wr(6, 8'h40, tg(1, 10'h066)); wr(6, 8'h60, 1);
    // switch 0 serves mPE 0 (corner 0); switch 2 serves mPE 3 (corner 1); switch 4 serves mPE 5 (corner 0)
    wr(16, 8'h00, 32'b0001); wr(18, 8'h00, 32'b0010); wr(20, 8'h00, 32'b0001);
    wr(31, 8'h00, 2);
    @(negedge clk); nclear = 1; @(negedge clk); nclear = 0;
    for (int c = 0; c < MCA_N; c++) begin v0[c] = 0; v3[c] = 0; v6[c] = 0; end

    for (int ts = 0; ts < 2; ts++) begin
      logic [PKT_W-1:0] p0, p5, p6, s0, s3, s6;
      int cyc;
      p0 = {$urandom, $urandom}; p5 = {$urandom, $urandom}; p6 = {$urandom, $urandom};
      io(0, 0, p0); io(5, 0, p5); io(6, 0, p6);
      for (int c = 0; c < MCA_N; c++) begin
        for (int r = 0; r < MCA_N; r++) begin
          if (p0[r]) v0[c] += w0[r][c];
          if (p6[r]) v6[c] += w6[r][c];
          if (p5[r]) v6[c] += w5[r][c];
        end
        s0[c] = v0[c] >= VA; if (s0[c]) v0[c] = 0;
        s6[c] = v6[c] >= VB; if (s6[c]) v6[c] = 0;
      end
      for (int c = 0; c < MCA_N; c++) begin
        for (int r = 0; r < MCA_N; r++) if (s0[r]) v3[c] += w3[r][c];
        s3[c] = v3[c] >= VA; if (s3[c]) v3[c] = 0;
      end
      n55 = 0; n66 = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 1000) begin @(posedge clk); cyc++; end
      chk(done, "NeuroCell done");
      chk(n55 == 1 && got55 == s3, $sformatf("ts%0d layer-2 output (mPE 3)", ts));
      chk(n66 == 1 && got66 == s6, $sformatf("ts%0d fan-in over two mPEs (mPE 6)", ts));
      for (int c = 0; c < MCA_N; c++) begin
        chk(int'(dut.g_mpe[0].u_mpe.g_lane[0].vmem[c]) == v0[c], "membrane potential, mPE 0");
        chk(int'(dut.g_mpe[3].u_mpe.g_lane[1].vmem[c]) == v3[c], "membrane potential, mPE 3");
        chk(int'(dut.g_mpe[6].u_mpe.g_lane[0].vmem[c]) == v6[c], "membrane potential, mPE 6");
      end
      $display("ts%0d: done after %0d cycles", ts, cyc);
    end
    chk(n_hop >= 1, "switch-to-switch hop happened");
    chk(n_zero >= 2, "zero packets dropped");
    chk(n_ccu == 2, "one current transfer per time step");
    chk(n_err == 0, "no routing error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
