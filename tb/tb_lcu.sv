// tb_lcu -- programs an mPE sequence of degree 3 (C2, C1, C_ext for lane 0)
// and checks the cycle-by-cycle order READ, three steps (the C_ext step
// stalls until ext_ok), FIRE, LOAD, SEND (held by obuf_busy), SERVE (held
// until served) and DONE; an mPE of another layer does not start.
module tb_lcu;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, phase_go = 0, obuf_busy = 0, ext_ok = 0, served = 0;
  logic [7:0] cfg_addr; logic [31:0] cfg_wdata; logic [1:0] phase;
  logic busy, tx_en, rx_en, mca_read, need_ext, release_o;
  logic [N_MCA-1:0] in_io, nrn_en, integ_en, fire_en, obuf_load;
  logic [VMEM_W-1:0] vth; logic [1:0] tx_sel, rx_dir; src_sel_e [N_MCA-1:0] src_sel;
  int checks = 0, failures = 0;
  lcu dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask
  initial begin
    cfg_addr = '0; cfg_wdata = '0; phase = 2'd1;
    repeat (2) @(posedge clk); rst_n = 1;
    wr(8'h00, {26'd0, 3'd3, 2'd1, 1'b1});          // enable, layer 1, degree 3
    wr(8'h01, 32'b0_01_1);                          // tx_en, tx_sel 1
    wr(8'h02, 32'd777);
    wr(8'h08, 32'b11); wr(8'h09, 32'b00);           // lane0 IO + neurons
    wr(8'h10, SRC_C2); wr(8'h11, SRC_C1); wr(8'h12, SRC_CEXT);
    wr(8'h18, SRC_C4);                              // lane1 step0 only
    chk(vth == 16'd777 && tx_en && tx_sel == 2'd1 && in_io == 4'b0001 && nrn_en == 4'b0001, "registers");
    // wrong phase: no start
    @(negedge clk); phase = 2'd0; phase_go = 1; @(negedge clk); phase_go = 0;
    @(negedge clk); chk(!busy, "other layer stays idle");
    @(negedge clk); phase = 2'd1; phase_go = 1; @(negedge clk); phase_go = 0;
    chk(busy && mca_read, "READ");
    @(negedge clk);
    chk(integ_en == 4'b0011 && src_sel[0] == SRC_C2 && src_sel[1] == SRC_C4, "step 0");
    @(negedge clk);
    chk(integ_en == 4'b0001 && src_sel[0] == SRC_C1, "step 1");
    @(negedge clk);
    chk(need_ext && integ_en == 0 && src_sel[0] == SRC_CEXT, "step 2 stalls");
    @(negedge clk); chk(need_ext && integ_en == 0, "still stalled");
    ext_ok = 1; #1; chk(integ_en == 4'b0001, "step 2 goes");
    @(negedge clk); ext_ok = 0;
    chk(fire_en == 4'b0001, "FIRE");
    obuf_busy = 1;
    @(negedge clk); chk(obuf_load == 4'b0001, "LOAD");
    @(negedge clk); @(negedge clk); chk(busy && !release_o, "SEND held");
    obuf_busy = 0; @(negedge clk);
    @(negedge clk); chk(busy && !release_o, "SERVE held");
    served = 1; @(negedge clk); served = 0;
    chk(release_o, "DONE");
    @(negedge clk); chk(!busy, "back to idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
