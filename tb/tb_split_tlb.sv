// tb_split_tlb: self-checking test of one split L1 TLB.
// A 4-entry, 2-cycle TLB is filled, looked up, overwritten and invalidated;
// every lookup is compared with a reference list of translations kept by the
// testbench (with its own round-robin model), and resp_valid must pulse
// exactly LAT cycles after each lookup.
module tb_split_tlb;
  localparam int ENT = 4, VW = 8, PW = 8, LAT = 2;
  logic clk = 0, rst_n = 0;
  logic lookup_valid = 0, fill_valid = 0, inval_valid = 0;
  logic [VW-1:0] lookup_vpn = 0, fill_vpn = 0, inval_vpn = 0;
  logic [PW-1:0] fill_ppn = 0;
  logic resp_valid, hit;
  logic [PW-1:0] ppn;
  int checks = 0, failures = 0;

  split_tlb #(.ENTRIES(ENT), .VPN_W(VW), .PPN_W(PW), .LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  // reference model
  logic          rv [ENT];
  logic [VW-1:0] rvpn [ENT];
  logic [PW-1:0] rppn [ENT];
  int rr = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic do_fill(input logic [VW-1:0] v, input logic [PW-1:0] p);
    int idx = -1;
    for (int e = 0; e < ENT; e++) if (rv[e] && rvpn[e] == v && idx < 0) idx = e;
    if (idx < 0) begin idx = rr; rr = (rr + 1) % ENT; end
    rv[idx] = 1; rvpn[idx] = v; rppn[idx] = p;
    @(negedge clk); fill_valid = 1; fill_vpn = v; fill_ppn = p;
    @(negedge clk); fill_valid = 0;
  endtask

  task automatic do_inval(input logic [VW-1:0] v);
    for (int e = 0; e < ENT; e++) if (rvpn[e] == v) rv[e] = 0;
    @(negedge clk); inval_valid = 1; inval_vpn = v;
    @(negedge clk); inval_valid = 0;
  endtask

  task automatic do_lookup(input logic [VW-1:0] v);
    bit exp_hit = 0; logic [PW-1:0] exp_ppn = 0; int n;
    for (int e = 0; e < ENT; e++) if (rv[e] && rvpn[e] == v) begin exp_hit = 1; exp_ppn = rppn[e]; end
    @(negedge clk); lookup_valid = 1; lookup_vpn = v;
    @(negedge clk); lookup_valid = 0; lookup_vpn = ~v;
    n = 1;
    while (!resp_valid && n < 10) begin @(negedge clk); n++; end
    check(n == LAT, $sformatf("latency %0d expected %0d", n, LAT));
    check(hit == exp_hit, $sformatf("vpn %h hit %0b expected %0b", v, hit, exp_hit));
    if (exp_hit) check(ppn == exp_ppn, $sformatf("vpn %h ppn %h expected %h", v, ppn, exp_ppn));
    @(negedge clk);
    check(!resp_valid && hit == exp_hit, "result must be held after the pulse");
  endtask

  initial begin
    for (int e = 0; e < ENT; e++) begin rv[e] = 0; rvpn[e] = 0; rppn[e] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    do_lookup(8'h11);
    do_fill(8'h11, 8'hA1);
    do_lookup(8'h11);
    do_lookup(8'h12);
    do_fill(8'h12, 8'hA2); do_fill(8'h13, 8'hA3); do_fill(8'h14, 8'hA4);
    for (int v = 8'h11; v <= 8'h14; v++) do_lookup(v[VW-1:0]);
    do_fill(8'h12, 8'hB2);          // overwrite in place
    do_lookup(8'h12);
    do_fill(8'h15, 8'hA5);          // evicts the round-robin victim
    for (int v = 8'h11; v <= 8'h15; v++) do_lookup(v[VW-1:0]);
    do_inval(8'h13);
    for (int v = 8'h11; v <= 8'h15; v++) do_lookup(v[VW-1:0]);
    for (int i = 0; i < 40; i++) begin
      if ($urandom_range(0, 2) == 0) do_fill(8'h10 + VW'($urandom_range(0, 9)), PW'($urandom));
      else if ($urandom_range(0, 5) == 0) do_inval(8'h10 + VW'($urandom_range(0, 9)));
      else do_lookup(8'h10 + VW'($urandom_range(0, 9)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
