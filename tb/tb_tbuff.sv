// tb_tbuff -- target entries and count are written and read back by index.
module tb_tbuff;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, cnt_we = 0;
  logic [0:0] wr_idx, rd_idx; target_t wr_tgt, rd_tgt; logic [1:0] cnt_wdata, n_tgt;
  target_t model [2];
  int checks = 0, failures = 0;
  tbuff dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    wr_idx = 0; rd_idx = 0; wr_tgt = '0; cnt_wdata = 0; model[0] = '0; model[1] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); chk(n_tgt == 0, "count reset");
    for (int i = 0; i < 50; i++) begin
      wr_idx = 1'($urandom); wr_tgt = target_t'($urandom); wr_en = 1;
      model[wr_idx] = wr_tgt;
      cnt_we = 1; cnt_wdata = 2'($urandom_range(0, 2));
      @(negedge clk); wr_en = 0; cnt_we = 0;
      chk(n_tgt == cnt_wdata, "count");
      for (int k = 0; k < 2; k++) begin rd_idx = 1'(k); #1; chk(rd_tgt == model[k], "entry"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
