// tb_l1_bank: random reads and writes of one 64-set, 4-way, 64-byte-line
// bank against a reference copy kept by the testbench. Checks the one-cycle
// read timing, that outputs hold while rd_en is low, byte-enabled data
// writes, metadata writes and the reset of the valid bits.
module tb_l1_bank;
  localparam int S = 64, W = 4, LB = 64, TW = 28, LW = LB * 8;
  logic clk = 0, rst_n = 0;
  logic rd_en = 0, wr_en = 0, wr_meta = 0, wr_valid = 0, wr_dirty = 0;
  logic [5:0] rd_set = 0, wr_set = 0;
  logic [1:0] wr_way = 0;
  logic [TW-1:0] wr_tag = 0;
  logic [LB-1:0] wr_byte_en = 0;
  logic [LW-1:0] wr_data = 0;
  logic [TW-1:0] rd_tag [W];
  logic [W-1:0] rd_valid, rd_dirty;
  logic [LW-1:0] rd_data [W];
  int checks = 0, failures = 0;

  l1_bank #(.SETS(S), .WAYS(W), .LINE_BYTES(LB), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;

  logic [TW-1:0] m_tag [S][W];
  logic m_valid [S][W], m_dirty [S][W];
  logic [LW-1:0] m_data [S][W];
  logic m_known [S][W];

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic rd(input int s);
    @(negedge clk); rd_en = 1; rd_set = 6'(s);
    @(negedge clk); rd_en = 0; rd_set = 6'(s + 1);
    for (int w = 0; w < W; w++) begin
      check(rd_valid[w] == m_valid[s][w] && rd_dirty[w] == m_dirty[s][w], $sformatf("set %0d way %0d valid/dirty", s, w));
      if (m_known[s][w]) check(rd_tag[w] == m_tag[s][w] && rd_data[w] == m_data[s][w], $sformatf("set %0d way %0d tag/data", s, w));
    end
    @(negedge clk);  // held while rd_en is low
    for (int w = 0; w < W; w++)
      if (m_known[s][w]) check(rd_data[w] == m_data[s][w], "held data");
  endtask

  task automatic wr(input int s, input int w, input bit meta, input bit full);
    logic [LW-1:0] d; logic [LB-1:0] be;
    for (int k = 0; k < LW/32; k++) d[k*32 +: 32] = $urandom;
    be = full ? '1 : {$urandom, $urandom};
    @(negedge clk);
    wr_en = 1; wr_set = 6'(s); wr_way = 2'(w); wr_meta = meta; wr_byte_en = be; wr_data = d;
    wr_tag = TW'($urandom); wr_valid = $urandom_range(0, 1); wr_dirty = $urandom_range(0, 1);
    if (meta) begin m_tag[s][w] = wr_tag; m_valid[s][w] = wr_valid; m_dirty[s][w] = wr_dirty; end
    for (int b = 0; b < LB; b++) if (be[b]) m_data[s][w][b*8 +: 8] = d[b*8 +: 8];
    if (full && meta) m_known[s][w] = 1;
    @(negedge clk); wr_en = 0;
  endtask

  initial begin
    for (int s = 0; s < S; s++) for (int w = 0; w < W; w++) begin
      m_valid[s][w] = 0; m_dirty[s][w] = 0; m_known[s][w] = 0; m_tag[s][w] = 0; m_data[s][w] = 0;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    rd(0); rd(63);
    for (int i = 0; i < 300; i++) begin
      int s = $urandom_range(0, 7) * 9, w = $urandom_range(0, W-1);
      case ($urandom_range(0, 3))
        0: wr(s, w, 1, 1);
        1: wr(s, w, 0, 0);
        2: wr(s, w, 1, 0);
        default: rd(s);
      endcase
    end
    for (int s = 0; s < S; s += 9) rd(s);
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
