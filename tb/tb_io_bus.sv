// tb_io_bus -- tag broadcast and the return path. Random tag rectangles must
// reach exactly the NeuroCells whose (x, y) lie inside, in the same cycle.
// NeuroCell outputs are granted one at a time, never during a broadcast,
// and every offered packet is written exactly once.
module tb_io_bus;
  import resparc_pkg::*;
  localparam int NCX = 2, NCY = 2, NNC = 4;
  logic clk = 0, rst_n = 0, bc_valid = 0; io_bcast_t bc;
  logic [NNC-1:0] nc_in_valid, nc_out_valid, nc_out_ready;
  logic [3:0] nc_in_mpe; logic [1:0] nc_in_mca; logic [PKT_W-1:0] nc_in_data;
  logic [NNC-1:0][SRAM_AW-1:0] nc_out_addr; logic [NNC-1:0][PKT_W-1:0] nc_out_data;
  logic wr_valid, wr_ready = 1; logic [SRAM_AW-1:0] wr_addr; logic [PKT_W-1:0] wr_data;
  int checks = 0, failures = 0, pend [NNC], written [NNC];
  io_bus #(.NCX(NCX), .NCY(NCY)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    bc = '0; nc_out_valid = '0; nc_out_addr = '0; nc_out_data = '0;
    for (int n = 0; n < NNC; n++) begin pend[n] = 0; written[n] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      bc_valid = ($urandom % 3) == 0;
      bc = io_bcast_t'({$urandom, $urandom, $urandom, $urandom});
      for (int n = 0; n < NNC; n++) begin
        if (!nc_out_valid[n] && ($urandom % 3) == 0) begin
          nc_out_valid[n] = 1; nc_out_addr[n] = SRAM_AW'(n * 100 + pend[n]); nc_out_data[n] = {$urandom, $urandom};
          pend[n]++;
        end
      end
      #1;
      for (int n = 0; n < NNC; n++)
        chk(nc_in_valid[n] == (bc_valid && (n % NCX) >= bc.x_lo && (n % NCX) <= bc.x_hi &&
                               (n / NCX) >= bc.y_lo && (n / NCX) <= bc.y_hi), "tag match");
      chk(nc_in_data == bc.data && nc_in_mpe == bc.mpe && nc_in_mca == bc.mca, "broadcast fields");
      chk(!(wr_valid && bc_valid), "no write during broadcast");
      chk($countones(nc_out_ready) <= 1, "one grant");
      for (int n = 0; n < NNC; n++) if (nc_out_ready[n])
        chk(wr_addr == nc_out_addr[n] && wr_data == nc_out_data[n], "granted packet on the bus");
      begin
        logic [NNC-1:0] g; g = nc_out_ready;
        @(posedge clk); #1;
        for (int n = 0; n < NNC; n++) if (g[n]) begin written[n]++; nc_out_valid[n] = 0; end
      end
    end
    bc_valid = 0;
    repeat (20) begin
      logic [NNC-1:0] g; @(negedge clk); g = nc_out_ready;
      @(posedge clk); #1;
      for (int n = 0; n < NNC; n++) if (g[n]) begin written[n]++; nc_out_valid[n] = 0; end
    end
    for (int n = 0; n < NNC; n++) chk(written[n] == pend[n], $sformatf("NC %0d all written", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
