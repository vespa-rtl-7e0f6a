// tb_tag_match: random check of the per-bank tag comparators against a
// direct model (enable AND valid AND equal).
module tb_tag_match;
  localparam int W = 4, TW = 28;
  logic en;
  logic [TW-1:0] tags [W];
  logic [W-1:0] valid, hit;
  logic [TW-1:0] addr_tag;
  int checks = 0, failures = 0;

  tag_match #(.WAYS(W), .TAG_W(TW)) dut (.*);

  initial begin
    for (int i = 0; i < 500; i++) begin
      logic [W-1:0] exp;
      en = ($urandom_range(0, 3) != 0);
      addr_tag = TW'($urandom);
      valid = W'($urandom);
      for (int w = 0; w < W; w++) tags[w] = ($urandom_range(0, 1) == 0) ? addr_tag : (addr_tag ^ TW'(1 << $urandom_range(0, TW-1)));
      #1;
      for (int w = 0; w < W; w++) exp[w] = en && valid[w] && (tags[w] == addr_tag);
      checks++;
      if (hit != exp) begin failures++; $display("FAIL hit=%b exp=%b", hit, exp); end
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
