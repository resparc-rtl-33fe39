// tb_mpe -- one mPE evaluating a neuron whose fan-in spans two crossbars
// plus a borrowed current: lane 0 takes its input from the IO bus, lane 1
// from the switch network, and lane 0's neurons integrate C1, C2 and C_ext
// (degree-3 time multiplexing). The spike packet must go to a switch
// target and to an IO target, the lent current (MCA 2 = lane 1) must appear
// on I_out, and membrane potentials must carry over to a second time step.
// Expected spikes come from a model of the weights held in the testbench.
module tb_mpe;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic prog_we = 0; logic [1:0] prog_mca = '0; logic [5:0] prog_row = '0, prog_col = '0; logic [3:0] prog_g = '0;
  logic nclear = 0, phase_go = 0; logic [1:0] phase = '0; logic busy;
  logic io_in_valid = 0; logic [1:0] io_in_mca = '0; logic [PKT_W-1:0] io_in_data = '0;
  logic sw_in_valid = 0; logic [1:0] sw_in_mca = '0; logic [PKT_W-1:0] sw_in_data = '0;
  logic sw_out_valid; sw_pkt_t sw_out; logic sw_out_ready = 0;
  logic io_out_valid; logic [SRAM_AW-1:0] io_out_addr; logic [PKT_W-1:0] io_out_data; logic io_out_ready = 0;
  logic tx_en, rx_en; logic [1:0] rx_dir;
  logic req_in = 0, wait_out, req_out, wait_in = 1;
  logic [MCA_N-1:0][CUR_W-1:0] i_out, c_ext_in;
  int checks = 0, failures = 0;
  logic [3:0] w [2][MCA_N][MCA_N];
  int vm [MCA_N];
  localparam int VTH = 520;

  mpe dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask

  int n_sw, n_io, served_seen;
  logic [PKT_W-1:0] exp_spk;
  // output side: accept with random back-pressure and check
  always @(negedge clk) if (rst_n) begin
    sw_out_ready = ($urandom % 2) == 1;
    io_out_ready = ($urandom % 2) == 1;
  end
  always @(posedge clk) begin
    if (sw_out_valid && sw_out_ready) begin
      n_sw++;
      chk(sw_out.data == exp_spk && sw_out.addr == sw_addr_t'({4'd5, 2'd2, 2'd3}), "switch packet");
    end
    if (io_out_valid && io_out_ready) begin
      n_io++;
      chk(io_out_data == exp_spk && io_out_addr == 10'h123, "IO packet");
    end
  end
  // lender side: request the lent current once it is offered
  always @(negedge clk) begin
    req_in = tx_en && !wait_out && served_seen == 0;
    if (req_in) begin
      served_seen = 1;
      for (int c = 0; c < MCA_N; c++) begin
        int e; e = 0;
        for (int r = 0; r < MCA_N; r++) if (dut.g_lane[1].row_spk[r]) e += w[1][r][c];
        chk(int'(i_out[c]) == e, "lent current = MCA 2 column current");
      end
    end
  end

  initial begin
    c_ext_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) for (int r = 0; r < MCA_N; r++) for (int c = 0; c < MCA_N; c++) begin
      w[m][r][c] = 4'($urandom);
      @(negedge clk); prog_we = 1; prog_mca = 2'(m); prog_row = 6'(r); prog_col = 6'(c); prog_g = w[m][r][c];
    end
    @(negedge clk); prog_we = 0;
    wr(8'h00, {26'd0, 3'd3, 2'd0, 1'b1});
    wr(8'h01, 32'b0_01_1);                   // lend MCA 2 (lane 1)
    wr(8'h02, VTH);
    wr(8'h08, 32'b11); wr(8'h09, 32'b00); wr(8'h0a, 32'b00); wr(8'h0b, 32'b00);
    wr(8'h10, SRC_C1); wr(8'h11, SRC_C2); wr(8'h12, SRC_CEXT);
    wr(8'h40, {21'd0, 1'b0, 10'({4'd5, 2'd2, 2'd3})});
    wr(8'h41, {21'd0, 1'b1, 10'h123});
    wr(8'h60, 2);
    @(negedge clk); nclear = 1; @(negedge clk); nclear = 0;
    for (int c = 0; c < MCA_N; c++) vm[c] = 0;

    for (int ts = 0; ts < 2; ts++) begin
      logic [PKT_W-1:0] p0, p1;
      int t0, lat;
      p0 = {$urandom, $urandom}; p1 = {$urandom, $urandom};
      @(negedge clk); io_in_valid = 1; io_in_mca = 0; io_in_data = p0;
      sw_in_valid = 1; sw_in_mca = 0; sw_in_data = '1;          // ignored: lane 0 listens to IO
      @(negedge clk); io_in_valid = 0; sw_in_valid = 1; sw_in_mca = 1; sw_in_data = p1;
      @(negedge clk); sw_in_valid = 0;
      for (int c = 0; c < MCA_N; c++) c_ext_in[c] = CUR_W'($urandom_range(0, 200));
      for (int c = 0; c < MCA_N; c++) begin
        for (int r = 0; r < MCA_N; r++) begin
          if (p0[r]) vm[c] += w[0][r][c];
          if (p1[r]) vm[c] += w[1][r][c];
        end
        vm[c] += c_ext_in[c];
        exp_spk[c] = vm[c] >= VTH;
        if (exp_spk[c]) vm[c] = 0;
      end
      n_sw = 0; n_io = 0; served_seen = 0; wait_in = 1;
      @(negedge clk); phase_go = 1; t0 = $time; @(negedge clk); phase_go = 0;
      lat = 0;
      while (!req_out && lat < 50) begin @(negedge clk); lat++; end
      chk(req_out, "C_ext requested");
      repeat (4) @(negedge clk);
      chk(dut.u_lcu.st == dut.u_lcu.S_STEP, "stalled while neighbour waits");
      wait_in = 0;
      lat = 0;
      while (busy && lat < 200) begin @(negedge clk); lat++; end
      chk(!busy, "evaluation finished");
      chk(n_sw == 1 && n_io == 1, $sformatf("one packet per target (%0d,%0d)", n_sw, n_io));
      chk(served_seen == 1, "lent current taken");
      for (int c = 0; c < MCA_N; c++) chk(int'(dut.g_lane[0].vmem[c]) == vm[c], "membrane carried over");
      chk(dut.g_lane[0].has_data == 0, "iBUFF released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
