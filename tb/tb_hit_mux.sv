// tb_hit_mux: the two-level hit multiplexer must forward the line of the
// single hitting way and name its bank and way; with no hit, any_hit is low
// and the line is zero. Checked for 2 banks (32 kB) and 4 banks (64 kB).
module tb_hit_mux;
  localparam int W = 4, LW = 512;
  logic [W-1:0]  hit2 [2];
  logic [LW-1:0] data2 [2][W];
  logic [W-1:0]  hit4 [4];
  logic [LW-1:0] data4 [4][W];
  logic any2, any4;
  logic [0:0] b2;
  logic [1:0] b4, w2, w4;
  logic [LW-1:0] l2, l4;
  int checks = 0, failures = 0;

  hit_mux #(.NUM_BANKS(2), .WAYS(W), .LINE_W(LW)) dut2 (.hit(hit2), .data(data2), .any_hit(any2), .hit_bank(b2), .hit_way(w2), .line(l2));
  hit_mux #(.NUM_BANKS(4), .WAYS(W), .LINE_W(LW)) dut4 (.hit(hit4), .data(data4), .any_hit(any4), .hit_bank(b4), .hit_way(w4), .line(l4));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int i = 0; i < 300; i++) begin
      int hb2, hw2, hb4, hw4;
      for (int b = 0; b < 4; b++) for (int w = 0; w < W; w++) begin
        for (int k = 0; k < LW/32; k++) data4[b][w][k*32 +: 32] = $urandom;
        if (b < 2) data2[b][w] = data4[b][w] ^ {LW{1'b1}};
      end
      hb2 = $urandom_range(0, 2); hw2 = $urandom_range(0, W-1);  // hb2 == 2: no hit
      hb4 = $urandom_range(0, 4); hw4 = $urandom_range(0, W-1);
      for (int b = 0; b < 2; b++) hit2[b] = (b == hb2) ? W'(1 << hw2) : '0;
      for (int b = 0; b < 4; b++) hit4[b] = (b == hb4) ? W'(1 << hw4) : '0;
      #1;
      if (hb2 < 2) begin
        check(any2 && b2 == hb2[0] && w2 == hw2[1:0] && l2 == data2[hb2][hw2], "2-bank hit select");
      end else check(!any2 && l2 == '0, "2-bank no hit");
      if (hb4 < 4) begin
        check(any4 && b4 == hb4[1:0] && w4 == hw4[1:0] && l4 == data4[hb4][hw4], "4-bank hit select");
      end else check(!any4 && l4 == '0, "4-bank no hit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
