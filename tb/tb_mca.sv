// tb_mca -- checks the crossbar model: after random programming, the column
// currents for random row spike vectors equal the sums of the programmed
// levels of the active rows, one cycle after read_en; clear drops cur_valid.
module tb_mca;
  import resparc_pkg::*;
  localparam int R = MCA_N, C = MCA_N, CW = CUR_W;
  logic clk = 0, rst_n = 0;
  logic prog_we = 0; logic [5:0] prog_row, prog_col; logic [3:0] prog_g;
  logic read_en = 0, clear = 0; logic [R-1:0] row_spk;
  logic [C-1:0][CW-1:0] cur; logic cur_valid;
  int checks = 0, failures = 0;
  logic [3:0] gm [R][C];

  mca dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    row_spk = '0; prog_row = '0; prog_col = '0; prog_g = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      gm[r][c] = 4'($urandom);
      @(negedge clk); prog_we = 1; prog_row = 6'(r); prog_col = 6'(c); prog_g = gm[r][c];
    end
    @(negedge clk); prog_we = 0;
    chk(!cur_valid, "cur_valid low after reset");
    for (int t = 0; t < 20; t++) begin
      row_spk = {$urandom, $urandom};
      if (t == 0) row_spk = '1;
      if (t == 1) row_spk = 64'h1;
      @(negedge clk); read_en = 1;
      @(negedge clk); read_en = 0;
      chk(cur_valid, "cur_valid one cycle after read");
      for (int c = 0; c < C; c++) begin
        int e; e = 0;
        for (int r = 0; r < R; r++) if (row_spk[r]) e += gm[r][c];
        chk(int'(cur[c]) == e, $sformatf("t%0d col %0d got %0d exp %0d", t, c, cur[c], e));
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    chk(!cur_valid, "clear drops cur_valid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
