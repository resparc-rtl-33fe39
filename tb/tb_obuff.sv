// tb_obuff -- the oBUFF offers a loaded packet once per target, in tBUFF
// order, honouring out_ready, and never offers a packet with zero targets.
module tb_obuff;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, out_ready = 0;
  logic [PKT_W-1:0] load_data, out_data; logic [1:0] n_tgt; logic out_valid, busy; logic [0:0] tgt_idx;
  int checks = 0, failures = 0;
  obuff dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    load_data = '0; n_tgt = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rnd = 0; rnd < 20; rnd++) begin
      int nt, sent; logic [PKT_W-1:0] d;
      nt = rnd % 3; d = {$urandom, $urandom};
      @(negedge clk); load = 1; load_data = d; n_tgt = 2'(nt);
      @(negedge clk); load = 0;
      sent = 0;
      for (int cyc = 0; cyc < 20 && out_valid; cyc++) begin
        out_ready = ($urandom % 2) == 1;
        chk(out_data == d && int'(tgt_idx) == sent, "data and target index");
        @(negedge clk);
        if (out_ready) sent++;
        out_ready = 0;
      end
      chk(sent == nt, $sformatf("sent %0d of %0d", sent, nt));
      chk(!busy, "empty after last target");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
