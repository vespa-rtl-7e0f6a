// tb_bank_lru: random touches against a reference recency list per set;
// the victim must always be the least recently touched way.
module tb_bank_lru;
  localparam int S = 64, W = 4;
  logic clk = 0, rst_n = 0;
  logic touch_en = 0;
  logic [5:0] touch_set = 0, vic_set = 0;
  logic [1:0] touch_way = 0, victim;
  int checks = 0, failures = 0;
  int order [S][W];   // order[s][0] = most recent ... order[s][W-1] = LRU

  bank_lru #(.SETS(S), .WAYS(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic touch(input int s, input int w);
    int pos = 0;
    for (int i = 0; i < W; i++) if (order[s][i] == w) pos = i;
    for (int i = pos; i > 0; i--) order[s][i] = order[s][i-1];
    order[s][0] = w;
    @(negedge clk); touch_en = 1; touch_set = 6'(s); touch_way = 2'(w);
    @(negedge clk); touch_en = 0;
  endtask

  task automatic check_victim(input int s);
    vic_set = 6'(s); #1;
    checks++;
    if (victim != 2'(order[s][W-1])) begin failures++; $display("FAIL set %0d victim %0d exp %0d", s, victim, order[s][W-1]); end
  endtask

  initial begin
    for (int s = 0; s < S; s++) for (int w = 0; w < W; w++) order[s][w] = w;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < S; s += 7) check_victim(s);
    for (int i = 0; i < 600; i++) begin
      int s = $urandom_range(0, 3) * 21;
      touch(s, $urandom_range(0, W-1));
      check_victim(s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
