// tb_gcu -- runs a 6-entry command table for three time steps against a
// memory model and NeuroCell models that answer start with done after a few
// cycles. Checks: each non-zero word is broadcast once with its tag and
// destination, zero words are skipped, RUN starts the tagged NeuroCells and
// waits for all their event flags, the time-step offset applies to reads
// and to write-backs, nclear pulses at start and done ends the run.
module tb_gcu;
  import resparc_pkg::*;
  localparam int NNC = 4;
  logic clk = 0, rst_n = 0, cfg_we = 0, start = 0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic busy, done, nclear, rd_en, wr_en, bc_valid, bus_wr_valid = 0, bus_wr_ready, zero_skip;
  logic [SRAM_AW-1:0] rd_addr, wr_addr, bus_wr_addr = '0; logic [PKT_W-1:0] rd_data, wr_data, bus_wr_data = '0;
  io_bcast_t bc; logic [NNC-1:0] nc_start, nc_done, event_flag; logic [15:0] tstep;
  logic [PKT_W-1:0] mem [1 << SRAM_AW];
  int n_start = 0;
  int checks = 0, failures = 0, n_bc = 0, n_skip = 0, n_clr = 0, n_wr = 0;
  int cnt [NNC];
  gcu #(.NCX(2), .NCY(2)) dut (.*);
  always #5 clk = ~clk;
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d; @(negedge clk); cfg_we = 0;
  endtask
  function automatic logic [31:0] cmd(cmd_op_e op, int a, int xl, int xh, int yl, int yh, int m, int c);
    gcmd_t g; g.op = op; g.sram_addr = SRAM_AW'(a); g.x_lo = 2'(xl); g.x_hi = 2'(xh); g.y_lo = 2'(yl); g.y_hi = 2'(yh);
    g.mpe = 4'(m); g.mca = 2'(c); return 32'(g);
  endfunction

  always @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];
  // NeuroCell models
  always @(posedge clk) begin
    for (int n = 0; n < NNC; n++) begin
      nc_done[n] <= 1'b0;
      if (!rst_n) cnt[n] <= 0;
      else if (nc_start[n]) cnt[n] <= 3 + 2 * n;
      else if (cnt[n] > 0) begin cnt[n] <= cnt[n] - 1; if (cnt[n] == 1) nc_done[n] <= 1'b1; end
    end
  end
  // expected broadcast order
  typedef struct { int addr; logic [NNC-1:0] tag; int mpe; } ev_t;
  ev_t q[$];
  logic [NNC-1:0] started;
  always @(posedge clk) if (rst_n) begin
    if (nclear) n_clr++;
    if (zero_skip) n_skip++;
    if (wr_en) begin n_wr++; chk(wr_addr == SRAM_AW'(16'h10 + tstep * 8), "write-back offset"); end
    if (|nc_start) begin
      chk(nc_start == (n_start % 2 == 0 ? 4'b0011 : 4'b1100), "RUN tag mask");
      n_start++;
      started = nc_start;
    end
    if (bc_valid) begin
      n_bc++;
      chk(q.size() > 0, "expected a broadcast");
      if (q.size() > 0) begin
        chk(bc.data == mem[q[0].addr] && bc.mpe == 4'(q[0].mpe), "broadcast data / destination");
        chk(dut.tag_mask(dut.cmd) == q[0].tag, "broadcast tag");
        if (q[0].tag == 4'b1000) chk(event_flag == 0 && started == 4'b0011, "NC 0,1 finished before next broadcast");
        void'(q.pop_front());
      end
    end
  end

  initial begin
    nc_done = '0; for (int n = 0; n < NNC; n++) cnt[n] = 0; started = '0;
    for (int a = 0; a < (1 << SRAM_AW); a++) mem[a] = '0;
    for (int t = 0; t < 3; t++) begin
      mem[t * 8 + 0] = {$urandom, $urandom} | 1;
      mem[t * 8 + 2] = (t < 2) ? 64'h8000_0000_0000_0000 : '0;
      q.push_back('{t * 8, 4'b0011, 3});
      if (t < 2) q.push_back('{t * 8 + 2, 4'b1000, 5});
    end
    repeat (2) @(posedge clk); rst_n = 1;
    wr(0, cmd(CMD_BCAST, 0, 0, 1, 0, 0, 3, 2));
    wr(1, cmd(CMD_BCAST, 1, 0, 1, 0, 1, 0, 0));
    wr(2, cmd(CMD_RUN,   0, 0, 1, 0, 0, 0, 0));
    wr(3, cmd(CMD_BCAST, 2, 1, 1, 1, 1, 5, 1));
    wr(4, cmd(CMD_RUN,   0, 0, 1, 1, 1, 0, 0));
    wr(5, cmd(CMD_END,   0, 0, 0, 0, 0, 0, 0));
    wr(8'h40, 3); wr(8'h41, 8);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin
        // write-backs while the NeuroCells run
        repeat (6) @(negedge clk);
        bus_wr_valid = 1; bus_wr_addr = 10'h10; bus_wr_data = 64'hABCD;
        @(negedge clk); bus_wr_valid = 0;
      end
      begin
        int c; c = 0;
        while (!done && c < 500) begin @(posedge clk); c++; end
        chk(done, "run ends");
      end
    join
    chk(n_bc == 5 && q.size() == 0, $sformatf("five broadcasts (%0d)", n_bc));
    chk(n_skip == 4, $sformatf("four zero words skipped (%0d)", n_skip));
    chk(n_clr == 1, "nclear once");
    chk(n_wr == 1, "one write-back");
    chk(tstep == 2, "three time steps");
    @(negedge clk); chk(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
