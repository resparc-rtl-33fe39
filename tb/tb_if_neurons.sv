// tb_if_neurons -- integrate-and-fire check against a reference model:
// random currents are integrated over several steps, then fire compares with
// the threshold, spiking neurons reset to zero, others keep their potential.
// Also checks clear and saturation.
module tb_if_neurons;
  import resparc_pkg::*;
  localparam int N = MCA_N;
  logic clk = 0, rst_n = 0, clear = 0, integ_en = 0, fire_en = 0;
  logic [N-1:0][CUR_W-1:0] cur; logic [VMEM_W-1:0] vth;
  logic [N-1:0] spk; logic [N-1:0][VMEM_W-1:0] vmem;
  int checks = 0, failures = 0;
  int model [N];

  if_neurons dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    cur = '0; vth = 16'd1500;
    for (int i = 0; i < N; i++) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rnd = 0; rnd < 6; rnd++) begin
      int steps; steps = 1 + rnd % 4;
      for (int s = 0; s < steps; s++) begin
        for (int i = 0; i < N; i++) begin cur[i] = CUR_W'($urandom_range(0, 700)); model[i] += cur[i]; end
        @(negedge clk); integ_en = 1; @(negedge clk); integ_en = 0;
      end
      for (int i = 0; i < N; i++) chk(int'(vmem[i]) == model[i], $sformatf("vmem %0d", i));
      @(negedge clk); fire_en = 1; @(negedge clk); fire_en = 0;
      for (int i = 0; i < N; i++) begin
        chk(spk[i] == (model[i] >= 1500), $sformatf("spk %0d", i));
        if (model[i] >= 1500) model[i] = 0;
        chk(int'(vmem[i]) == model[i], $sformatf("reset %0d", i));
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    chk(vmem == '0 && spk == '0, "clear");
    // saturation
    vth = '1;
    for (int s = 0; s < 80; s++) begin
      for (int i = 0; i < N; i++) cur[i] = '1;
      @(negedge clk); integ_en = 1; @(negedge clk); integ_en = 0;
    end
    chk(vmem[0] == '1, "saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
