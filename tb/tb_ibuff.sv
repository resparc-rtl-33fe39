// tb_ibuff -- the iBUFF ORs packets that arrive for one MCA, empties on
// consume and keeps a packet written in the consume cycle.
module tb_ibuff;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, consume = 0;
  logic [PKT_W-1:0] wr_data, data, model; logic has_data;
  int checks = 0, failures = 0;
  ibuff dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    wr_data = '0; model = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); chk(!has_data && data == '0, "empty after reset");
    for (int i = 0; i < 200; i++) begin
      wr_en = ($urandom % 2) == 1; consume = ($urandom % 5) == 0; wr_data = {$urandom, $urandom};
      @(negedge clk);
      if (consume) model = wr_en ? wr_data : '0; else if (wr_en) model = model | wr_data;
      chk(data == model, $sformatf("data step %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
