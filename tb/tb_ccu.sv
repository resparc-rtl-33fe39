// tb_ccu -- random stimulus against a reference of the current transfer
// rules: gated I_out, wait while the lender's currents are not valid,
// served set by a completed transfer, borrower's ext_ok = need & !wait.
module tb_ccu;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic tx_en, cur_valid, req_in, clear_served, need_ext, wait_in;
  logic [1:0] tx_sel;
  logic [N_MCA-1:0][MCA_N-1:0][CUR_W-1:0] c_loc;
  logic [MCA_N-1:0][CUR_W-1:0] i_out, c_ext_in, c_ext;
  logic wait_out, served, req_out, ext_ok;
  logic m_served;
  int checks = 0, failures = 0;
  ccu dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    {tx_en, cur_valid, req_in, clear_served, need_ext, wait_in} = '0; tx_sel = '0;
    c_loc = '0; c_ext_in = '0; m_served = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      tx_en = ($urandom % 4) != 0; cur_valid = ($urandom % 2) == 1; req_in = ($urandom % 2) == 1;
      clear_served = ($urandom % 8) == 0; need_ext = ($urandom % 2) == 1; wait_in = ($urandom % 2) == 1;
      tx_sel = 2'($urandom);
      for (int m = 0; m < N_MCA; m++) for (int c = 0; c < MCA_N; c++) c_loc[m][c] = CUR_W'($urandom);
      for (int c = 0; c < MCA_N; c++) c_ext_in[c] = CUR_W'($urandom);
      #1;
      chk(i_out == (tx_en ? c_loc[tx_sel] : '0), "gated I_out");
      chk(wait_out == !(tx_en && cur_valid), "wait");
      chk(req_out == need_ext && ext_ok == (need_ext && !wait_in) && c_ext == c_ext_in, "borrower");
      chk(served == m_served, "served");
      @(posedge clk);
      if (clear_served) m_served = 0; else if (req_in && tx_en && cur_valid) m_served = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
