// tb_mlp_slice -- one mPE running a slice of a fully connected (MLP) hidden
// layer over many time steps: 64 neurons with a fan-in of 256, the largest
// fan-in the four crossbars of one mPE hold without borrowing current.
// The 256 inputs are split in four 64-row blocks, one per crossbar; every
// block's input packet arrives over the IO bus, and lane 0's neurons
// integrate C1, C2, C3, C4 in turn (degree 4 time multiplexing). Lanes 1-3
// only compute currents; their neurons are disabled.
// Inputs are random spike trains (each input spikes in a step with
// probability 1/4, as a rate-coded image would); weights are random 4-bit
// levels. Every step the output packet written towards the memory is
// compared with an integrate-and-fire model held in the testbench, and the
// evaluation time is checked: READ + 4 STEP + FIRE + LOAD + SEND + DONE
// must finish within a fixed bound when the output is accepted at once.
// The mapping follows the partitioning of a wide fan-in over several
// crossbars; the sizes, rates and threshold are this test's choice.
module tb_mlp_slice;
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
  localparam int NSTEPS = 20, VTH = 1200, MAX_CYC = 12;
  logic [3:0] w [N_MCA][MCA_N][MCA_N];
  int vm [MCA_N];
  int n_out, n_spikes, n_sw;
  logic [PKT_W-1:0] got;

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
    if (io_out_valid && io_out_ready) begin n_out++; got = io_out_data; chk(io_out_addr == 10'h200, $sformatf("output address %h at %0t", io_out_addr, $time)); end
    if (sw_out_valid) n_sw++;
  end

  initial begin
    c_ext_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < N_MCA; m++) for (int r = 0; r < MCA_N; r++) for (int c = 0; c < MCA_N; c++) begin
      w[m][r][c] = 4'($urandom);
      @(negedge clk); prog_we = 1; prog_mca = 2'(m); prog_row = 6'(r); prog_col = 6'(c); prog_g = w[m][r][c];
    end
    @(negedge clk); prog_we = 0;
    wr(8'h00, {26'd0, 3'd4, 2'd0, 1'b1});      // enable, layer 0, degree 4
    wr(8'h01, 32'd0);                           // no current lending
    wr(8'h02, VTH);
    wr(8'h08, 32'b11);                          // lane 0: IO input, neurons fire
    for (int m = 1; m < N_MCA; m++) wr(8'(8'h08 + m), 32'b01);
    for (int k = 0; k < 4; k++) wr(8'(8'h10 + k), 32'(k + 1));   // C1, C2, C3, C4
    wr(8'h40, {21'd0, 1'b1, 10'h200});
    wr(8'h60, 1);
    @(negedge clk); nclear = 1; @(negedge clk); nclear = 0;
    for (int c = 0; c < MCA_N; c++) vm[c] = 0;
    n_spikes = 0; n_sw = 0;

    for (int ts = 0; ts < NSTEPS; ts++) begin
      logic [PKT_W-1:0] p [N_MCA];
      logic [PKT_W-1:0] exp_spk;
      int lat;
      for (int m = 0; m < N_MCA; m++) begin
        p[m] = spike_train();
        @(negedge clk); io_in_valid = 1; io_in_mca = 2'(m); io_in_data = p[m];
      end
      @(negedge clk); io_in_valid = 0;
      for (int c = 0; c < MCA_N; c++) begin
        for (int m = 0; m < N_MCA; m++)
          for (int r = 0; r < MCA_N; r++) if (p[m][r]) vm[c] += w[m][r][c];
        if (vm[c] > 65535) vm[c] = 65535;
        exp_spk[c] = vm[c] >= VTH;
        if (exp_spk[c]) vm[c] = 0;
      end
      n_out = 0; got = '0;
      @(negedge clk); phase_go = 1; @(negedge clk); phase_go = 0;
      lat = 1;
      while (busy && lat < 100) begin @(negedge clk); lat++; end
      chk(!busy, "step finished");
      chk(lat <= MAX_CYC, $sformatf("step %0d took %0d cycles", ts, lat));
      // an all-zero output packet is still sent by the mPE; zero-checks sit
      // in the switches and on memory reads
      chk(n_out == 1, $sformatf("step %0d: one output packet (%0d)", ts, n_out));
      chk(got == exp_spk, $sformatf("step %0d: spikes %h expected %h", ts, got, exp_spk));
      for (int c = 0; c < MCA_N; c++) chk(int'(dut.g_lane[0].vmem[c]) == vm[c], "membrane potential");
      n_spikes += $countones(exp_spk);
    end
    chk(n_sw == 0, "nothing sent to the switch network");
    chk(n_spikes > 0 && n_spikes < NSTEPS * MCA_N, $sformatf("neurons both fire and stay silent (%0d spikes)", n_spikes));
    $display("tb_mlp_slice: %0d output spikes in %0d steps", n_spikes, NSTEPS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
