// tb_cnn_slice -- one mPE running a slice of a convolutional layer over
// several time steps: an 8 x 8 input map (one 64-bit spike packet, pixel
// y*8+x on row y*8+x) convolved with four 3 x 3 kernels, stride 1, no
// padding, giving 4 x 6 x 6 = 144 output neurons. The connectivity matrix is
// sparse: each column holds the 9 weights of its kernel at the rows of its
// receptive field and zeros elsewhere. Columns are filled kernel by kernel,
// 64 per crossbar, so crossbars 0, 1 and 2 hold 64, 64 and 16 neurons.
// The same input packet is broadcast to all three lanes (input sharing),
// each lane integrates its own crossbar (degree 1) and sends its spike
// packet to its own memory address. Weights are random non-zero levels;
// the expected spikes come from a direct convolution model in the
// testbench, not from the crossbar contents. The layer shape is this
// test's choice, scaled down from the convolutional benchmarks.
module tb_cnn_slice;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic prog_we = 0; logic [1:0] prog_mca = '0; logic [5:0] prog_row = '0, prog_col = '0; logic [3:0] prog_g = '0;
  logic nclear = 0, phase_go = 0; logic [1:0] phase = '0; logic busy;
  logic io_in_valid = 0; logic [1:0] io_in_mca = '0; logic [PKT_W-1:0] io_in_data = '0;
  logic sw_in_valid = 0; logic [1:0] sw_in_mca = '0; logic [PKT_W-1:0] sw_in_data = '0;
  logic sw_out_valid; sw_pkt_t sw_out; logic sw_out_ready = 1;
  logic io_out_valid; logic [SRAM_AW-1:0] io_out_addr; logic [PKT_W-1:0] io_out_data; logic io_out_ready = 1;
  logic tx_en, rx_en; logic [1:0] rx_dir;
  logic req_in = 0, wait_out, req_out, wait_in = 1;
  logic [MCA_N-1:0][CUR_W-1:0] i_out, c_ext_in;
  int checks = 0, failures = 0;
  localparam int NSTEPS = 12, VTH = 60, MAX_CYC = 12, NK = 4, NOUT = NK * 36;
  logic [3:0] kw [NK][3][3];
  logic [3:0] w [N_MCA][MCA_N][MCA_N];
  int vm [NOUT];
  int n_out, n_spikes, n_sw;
  logic [PKT_W-1:0] got [3];

  mpe dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask
  function automatic logic [PKT_W-1:0] spike_train();
    logic [PKT_W-1:0] p;
    for (int i = 0; i < PKT_W; i++) p[i] = ($urandom % 4) == 0;
    return p;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (io_out_valid && io_out_ready) begin
      n_out++;
      chk(io_out_addr >= 10'h300 && io_out_addr < 10'h303, $sformatf("output address %h", io_out_addr));
      got[2'(io_out_addr - 10'h300)] = io_out_data;
    end
    if (sw_out_valid) n_sw++;
  end

  initial begin
    c_ext_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NK; k++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) kw[k][i][j] = 4'($urandom_range(1, 15));
    // column n = k*36 + oy*6 + ox goes to crossbar n/64, column n%64
    for (int m = 0; m < N_MCA; m++) for (int r = 0; r < MCA_N; r++) for (int c = 0; c < MCA_N; c++) w[m][r][c] = '0;
    for (int n = 0; n < NOUT; n++) begin
      int k, oy, ox;
      k = n / 36; oy = (n % 36) / 6; ox = n % 6;
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) w[n / 64][(oy + i) * 8 + ox + j][n % 64] = kw[k][i][j];
    end
    for (int m = 0; m < 3; m++) for (int r = 0; r < MCA_N; r++) for (int c = 0; c < MCA_N; c++) begin
      @(negedge clk); prog_we = 1; prog_mca = 2'(m); prog_row = 6'(r); prog_col = 6'(c); prog_g = w[m][r][c];
    end
    @(negedge clk); prog_we = 0;
    wr(8'h00, {26'd0, 3'd1, 2'd0, 1'b1});      // enable, layer 0, degree 1
    wr(8'h01, 32'd0);
    wr(8'h02, VTH);
    for (int m = 0; m < 3; m++) begin
      wr(8'(8'h08 + m), 32'b11);                // IO input, neurons fire
      wr(8'(8'h10 + 8 * m), 32'(m + 1));        // lane m integrates its own crossbar
      wr(8'(8'h40 + 4 * m), {21'd0, 1'b1, 10'(10'h300 + m)});
      wr(8'(8'h60 + m), 1);
    end
    wr(8'h0b, 32'b00);
    @(negedge clk); nclear = 1; @(negedge clk); nclear = 0;
    for (int c = 0; c < NOUT; c++) vm[c] = 0;
    n_spikes = 0; n_sw = 0;

    for (int ts = 0; ts < NSTEPS; ts++) begin
      logic [PKT_W-1:0] img;
      logic [PKT_W-1:0] exp_spk [3];
      int lat;
      for (int i = 0; i < PKT_W; i++) img[i] = ($urandom % 3) == 0;
      for (int m = 0; m < 3; m++) begin
        @(negedge clk); io_in_valid = 1; io_in_mca = 2'(m); io_in_data = img;
      end
      @(negedge clk); io_in_valid = 0;
      for (int m = 0; m < 3; m++) exp_spk[m] = '0;
      for (int n = 0; n < NOUT; n++) begin
        int k, oy, ox;
        k = n / 36; oy = (n % 36) / 6; ox = n % 6;
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) if (img[(oy + i) * 8 + ox + j]) vm[n] += kw[k][i][j];
        if (vm[n] >= VTH) begin exp_spk[n / 64][n % 64] = 1'b1; vm[n] = 0; end
      end
      n_out = 0; for (int m = 0; m < 3; m++) got[m] = '0;
      @(negedge clk); phase_go = 1; @(negedge clk); phase_go = 0;
      lat = 1;
      while (busy && lat < 100) begin @(negedge clk); lat++; end
      chk(!busy, "step finished");
      chk(lat <= MAX_CYC, $sformatf("step %0d took %0d cycles", ts, lat));
      chk(n_out == 3, $sformatf("step %0d: one packet per lane (%0d)", ts, n_out));
      for (int m = 0; m < 3; m++) chk(got[m] == exp_spk[m], $sformatf("step %0d lane %0d: spikes %h expected %h", ts, m, got[m], exp_spk[m]));
      for (int n = 0; n < 64; n++) begin
        chk(int'(dut.g_lane[0].vmem[n]) == vm[n], "membrane potential, crossbar 0");
        chk(int'(dut.g_lane[1].vmem[n]) == vm[64 + n], "membrane potential, crossbar 1");
        if (n < NOUT - 128) chk(int'(dut.g_lane[2].vmem[n]) == vm[128 + n], "membrane potential, crossbar 2");
      end
      for (int m = 0; m < 3; m++) n_spikes += $countones(exp_spk[m]);
    end
    chk(n_sw == 0, "nothing sent to the switch network");
    chk(n_spikes > 0 && n_spikes < NSTEPS * NOUT, $sformatf("neurons both fire and stay silent (%0d spikes)", n_spikes));
    $display("tb_cnn_slice: %0d output spikes in %0d steps", n_spikes, NSTEPS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
