// tb_input_sram -- writes random words and reads them back with the
// one-cycle read latency, including a read of a word written earlier.
module tb_input_sram;
  import resparc_pkg::*;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [SRAM_AW-1:0] wr_addr, rd_addr; logic [PKT_W-1:0] wr_data, rd_data;
  logic [PKT_W-1:0] model [1 << SRAM_AW];
  int checks = 0, failures = 0;
  input_sram dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int a = 0; a < (1 << SRAM_AW); a++) begin
      @(negedge clk); wr_en = 1; wr_addr = SRAM_AW'(a); wr_data = {$urandom, $urandom}; model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      rd_addr = SRAM_AW'($urandom); rd_en = 1;
      @(negedge clk); rd_en = 0;
      chk(rd_data == model[rd_addr], $sformatf("read %0d", rd_addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
