// tb_prog_switch -- the centre switch (row 1, column 1, id 4) of a 3x3
// network. Packets from its mPE lines are routed by SW_ID: to its own mPE
// corners (oAddress = MCA_ID), to the row switches 3 and 5 (lines 4, 5) and
// the column switches 1 and 7 (lines 6, 7) with oAddress {mPE_ID, MCA_ID};
// packets from switch lines go to corner mPE_ID. All-zero packets are
// dropped (zero-check), an unreachable switch is a routing error, a line the
// switch does not serve is not accepted, and packets that compete for one
// output line are all delivered (arbitration) under random back-pressure.
module tb_prog_switch;
  import resparc_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0; logic [7:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic [SW_LINES-1:0] in_valid, in_ready, out_valid, out_ready;
  sw_pkt_t [SW_LINES-1:0] in_pkt, out_pkt;
  logic idle, zero_drop, route_err;
  int checks = 0, failures = 0, n_zero = 0, n_err = 0;
  sw_pkt_t expq [SW_LINES][$];

  prog_switch #(.ROW(1), .COL(1)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) out_ready = SW_LINES'($urandom);
  always @(posedge clk) if (rst_n) begin
    if (zero_drop) n_zero++;
    if (route_err) n_err++;
    for (int o = 0; o < SW_LINES; o++)
      if (out_valid[o] && out_ready[o]) begin
        int hit; hit = -1;
        foreach (expq[o][k]) if (hit < 0 && expq[o][k] == out_pkt[o]) hit = k;
        chk(hit >= 0, $sformatf("unexpected packet on line %0d", o));
        if (hit >= 0) expq[o].delete(hit);
      end
  end

  // route of a packet entering on line `li`
  function automatic int route(int li, sw_addr_t a, output sw_addr_t oa);
    oa = '0; oa.mca_id = a.mca_id;
    if (li >= 4 || a.sw_id == 4) return a.mpe_id;
    oa.mpe_id = a.mpe_id;
    case (a.sw_id) 3: return 4; 5: return 5; 1: return 6; 7: return 7; default: return -1; endcase
  endfunction

  task automatic send(int li, sw_pkt_t p);
    sw_addr_t oa; int o; sw_pkt_t q;
    o = route(li, p.addr, oa);
    if (o >= 0 && p.data != '0) begin q.data = p.data; q.addr = oa; expq[o].push_back(q); end
    @(negedge clk); in_valid[li] = 1; in_pkt[li] = p;
    @(posedge clk); while (!in_ready[li]) @(posedge clk);
    @(negedge clk); in_valid[li] = 0;
  endtask

  initial begin
    in_valid = '0; in_pkt = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_wdata = 32'b0111; @(negedge clk); cfg_we = 0;   // serve corners 0..2
    // every destination from corner 0 and from switch lines
    for (int s = 0; s < 9; s++) for (int m = 0; m < 4; m++) begin
      sw_pkt_t p; p.data = {$urandom, $urandom}; p.addr = {4'(s), 2'(m), 2'($urandom)};
      send(0, p);
    end
    for (int li = 4; li < 8; li++) begin
      sw_pkt_t p; p.data = {$urandom, $urandom}; p.addr = {4'd0, 2'($urandom), 2'($urandom)};
      send(li, p);
    end
    // zero-check
    begin sw_pkt_t p; p.data = '0; p.addr = {4'd4, 2'd1, 2'd0}; send(1, p); end
    // unserved corner 3
    @(negedge clk); in_valid[3] = 1; in_pkt[3] = {64'hff, 8'h40};
    repeat (3) @(negedge clk); chk(!in_ready[3], "unserved line not accepted"); in_valid[3] = 0;
    // contention: three inputs to corner 3 at once, several rounds
    for (int rnd = 0; rnd < 10; rnd++) fork
      begin sw_pkt_t p; p.data = {$urandom, $urandom} | 1; p.addr = {4'd4, 2'd3, 2'd1}; send(0, p); end
      begin sw_pkt_t p; p.data = {$urandom, $urandom} | 1; p.addr = {4'd4, 2'd3, 2'd2}; send(1, p); end
      begin sw_pkt_t p; p.data = {$urandom, $urandom} | 1; p.addr = {4'd0, 2'd3, 2'd3}; send(5, p); end
    join
    repeat (40) @(negedge clk);
    for (int o = 0; o < SW_LINES; o++) chk(expq[o].size() == 0, $sformatf("line %0d delivered all", o));
    chk(n_zero == 1, "one zero packet dropped");
    chk(n_err == 16, $sformatf("16 packets to unreachable switches flagged (%0d)", n_err));
    chk(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
