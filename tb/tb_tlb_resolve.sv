// tb_tlb_resolve: exhaustive check of the TLB miss gates and random check
// of the address-tag formation against an independent model.
module tb_tlb_resolve;
  import vespa_pkg::*;
  va_t va;
  logic hit_4k, hit_2m, hit_1g;
  logic [PPN4K_W-1:0] ppn_4k;
  logic [PPN2M_W-1:0] ppn_2m;
  logic [PPN1G_W-1:0] ppn_1g;
  logic sp_miss, page_walk;
  tag_t sp_tag, base_tag;
  int checks = 0, failures = 0;

  tlb_resolve dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int i = 0; i < 400; i++) begin
      pa_t pa_exp;
      {hit_4k, hit_2m, hit_1g} = 3'(i % 8);
      va     = {$urandom, $urandom};
      ppn_4k = PPN4K_W'($urandom);
      ppn_2m = PPN2M_W'($urandom);
      ppn_1g = PPN1G_W'($urandom);
      #1;
      check(sp_miss == (!hit_2m && !hit_1g), "sp_miss");
      check(page_walk == (!hit_4k && !hit_2m && !hit_1g), "page_walk");
      check(base_tag == ppn_4k, "base tag");
      // physical address of a superpage access: frame base + page offset
      if (hit_1g) pa_exp = (pa_t'(ppn_1g) << 30) + pa_t'(va % (64'd1 << 30));
      else        pa_exp = (pa_t'(ppn_2m) << 21) + pa_t'(va % (64'd1 << 21));
      if (hit_1g || hit_2m) check(sp_tag == pa_exp[PA_W-1:12], $sformatf("sp tag %h exp %h", sp_tag, pa_exp[PA_W-1:12]));
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
