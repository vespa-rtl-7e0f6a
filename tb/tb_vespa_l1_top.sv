// tb_vespa_l1_top: end-to-end test of the VESPA L1 at its default size
// (32 kB, two banks of 4 ways, 1-cycle superpage / 2-cycle base-page
// lookups, 64/32/8-entry TLBs).
//
// Around the cache sit behavioural models of the parts it talks to: a page
// table with 2 MB, 1 GB and 4 kB pages (4 kB frames chosen so that VA[12]
// and PA[12] often differ), a page walker answering after a few cycles, an
// L2 that refills lines after a few cycles and sometimes stalls writebacks,
// and a directory that sends coherence lookups. A golden copy of memory,
// indexed by physical address, checks every load, every coherence reply
// and the L2 contents. The test also checks the lookup latencies (superpage
// hits in SP_LAT cycles, base-page hits in BASE_LAT), the number of banks
// read, single-bank coherence lookups, the invlpg sweep time, and counts
// each mechanism; a mechanism that never happened counts as a failure.
module tb_vespa_l1_top;
  import vespa_pkg::*;

  localparam int SP_LAT = 1, BASE_LAT = 2, NB = 2;
  localparam int N_RANDOM = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       core_req_valid = 0, core_req_ready;
  core_req_t  core_req = '0;
  logic       core_resp_valid;
  core_resp_t core_resp;
  logic       mem_req_valid, mem_req_ready;
  pa_t        mem_req_addr;
  logic       mem_resp_valid;
  line_t      mem_resp_line;
  logic       mem_wb_valid, mem_wb_ready;
  pa_t        mem_wb_addr;
  line_t      mem_wb_line;
  logic       ptw_req_valid, ptw_req_ready;
  va_t        ptw_req_va;
  logic       ptw_resp_valid;
  ptw_resp_t  ptw_resp;
  logic       coh_req_valid = 0, coh_req_ready;
  coh_req_t   coh_req = '0;
  logic       coh_resp_valid;
  coh_resp_t  coh_resp;
  logic       inv_req_valid = 0, inv_req_ready;
  inv_req_t   inv_req = '0;
  logic       inv_done;
  logic [NB-1:0] bank_rd;

  vespa_l1_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ---------------------------------------------------------------
  // Page table
  // ---------------------------------------------------------------
  localparam logic [47:0] VA2M = 48'h0010_0000_0000;  // four 2 MB pages
  localparam logic [47:0] VA1G = 48'h0040_0000_0000;  // one 1 GB page
  localparam logic [47:0] VA4K = 48'h0020_0000_0000;  // sixteen 4 kB pages
  localparam logic [39:0] PHYS = 40'h00_7000_0000;    // TLB-bypass region

  function automatic logic [27:0] ppn4k_of(input int k);
    return 28'h30000 + 28'(k * 5 + ((k >> 1) & 1));
  endfunction

  // size: 0 4K, 1 2M, 2 1G; returns the physical address
  function automatic pa_t translate(input va_t va, output int size, output logic [27:0] ppn);
    if (va >= VA1G && va < VA1G + 48'h4000_0000) begin
      size = 2; ppn = 28'h5;
      return {ppn[9:0], va[29:0]};
    end else if (va >= VA2M && va < VA2M + 48'h80_0000) begin
      int k;
      k = int'((va - VA2M) >> 21);
      size = 1; ppn = 28'(19'h200 + 19'(3 * k));
      return {ppn[18:0], va[20:0]};
    end else begin
      int k;
      k = int'((va - VA4K) >> 12);
      size = 0; ppn = ppn4k_of(k);
      return {ppn, va[11:0]};
    end
  endfunction

  // ---------------------------------------------------------------
  // Golden memory and L2 model
  // ---------------------------------------------------------------
  logic [63:0]  gold  [logic [36:0]];   // by PA word address
  logic [511:0] l2mem [logic [33:0]];   // by PA line address

  function automatic logic [63:0] defword(input logic [36:0] wa);
    return {wa[31:0] ^ 32'h9E37_79B9, 27'(wa) ^ 27'h55AA55A, 5'h13};
  endfunction
  function automatic logic [63:0] gword(input logic [36:0] wa);
    return gold.exists(wa) ? gold[wa] : defword(wa);
  endfunction
  function automatic logic [511:0] gline(input logic [33:0] la);
    logic [511:0] l;
    for (int i = 0; i < 8; i++) l[i*64 +: 64] = gword({la, 3'(i)});
    return l;
  endfunction
  function automatic logic [511:0] mline(input logic [33:0] la);
    logic [511:0] l;
    if (l2mem.exists(la)) return l2mem[la];
    for (int i = 0; i < 8; i++) l[i*64 +: 64] = defword({la, 3'(i)});
    return l;
  endfunction

  int n_refill = 0, n_wb = 0, n_ptw = 0;
  logic [2:0] mem_cnt = 0;
  logic       mem_busy = 0;
  pa_t        mem_addr_q;
  assign mem_req_ready  = !mem_busy;
  assign mem_resp_valid = mem_busy && mem_cnt == 0;
  assign mem_resp_line  = mline(mem_addr_q[39:6]);
  always @(posedge clk) begin
    if (rst_n && mem_req_valid && mem_req_ready) begin
      mem_busy <= 1; mem_cnt <= 3'($urandom_range(1, 5)); mem_addr_q <= mem_req_addr; n_refill++;
    end else if (mem_busy) begin
      if (mem_cnt == 0) mem_busy <= 0; else mem_cnt <= mem_cnt - 1;
    end
  end
  logic wb_rdy = 1;
  assign mem_wb_ready = wb_rdy;
  always @(posedge clk) begin
    if (rst_n && mem_wb_valid && mem_wb_ready) begin
      check(mem_wb_line == gline(mem_wb_addr[39:6]), $sformatf("writeback data of %h", mem_wb_addr));
      l2mem[mem_wb_addr[39:6]] = mem_wb_line;
      n_wb++;
    end
    wb_rdy <= ($urandom_range(0, 2) != 0);
  end

  // Page walker model
  logic [2:0] ptw_cnt = 0;
  logic       ptw_busy = 0;
  va_t        ptw_va_q;
  assign ptw_req_ready  = !ptw_busy;
  assign ptw_resp_valid = ptw_busy && ptw_cnt == 0;
  always_comb begin
    int sz; logic [27:0] pn; pa_t pa;
    pa = translate(ptw_va_q, sz, pn);
    ptw_resp.size = page_size_e'(sz);
    ptw_resp.ppn  = pn;
  end
  always @(posedge clk) begin
    if (rst_n && ptw_req_valid && ptw_req_ready) begin
      ptw_busy <= 1; ptw_cnt <= 3'd4; ptw_va_q <= ptw_req_va; n_ptw++;
    end else if (ptw_busy) begin
      if (ptw_cnt == 0) ptw_busy <= 0; else ptw_cnt <= ptw_cnt - 1;
    end
  end

  // Bank activity
  int banks_rd_acc = 0;
  always @(posedge clk) banks_rd_acc <= banks_rd_acc + $countones(bank_rd);

  // ---------------------------------------------------------------
  // Mechanism counters
  // ---------------------------------------------------------------
  int n_sp_hit = 0, n_base_hit = 0, n_sp_fill = 0, n_base_fill = 0, n_store_hit = 0;
  int n_bypass = 0, n_coh_read = 0, n_coh_inv = 0, n_coh_wb = 0, n_coh_hit = 0;
  int n_sweep = 0, n_sweep_evict = 0, n_sweep_wb = 0, n_invlpg = 0, n_xbank = 0;

  // ---------------------------------------------------------------
  // Driver tasks
  // ---------------------------------------------------------------
  task automatic core_access(input core_op_e op, input va_t va, input bit phys,
                             input logic [63:0] wdata, input logic [7:0] be);
    int sz; logic [27:0] pn; pa_t pa; int lat; int ptw0, b0; bit exp_sp;
    logic [63:0] old, nw;
    if (phys) begin pa = va[39:0]; sz = 1; end
    else pa = translate(va, sz, pn);
    exp_sp = phys || sz != 0;
    va[2:0] = 3'b0; pa[2:0] = 3'b0;
    @(negedge clk);
    core_req_valid = 1;
    core_req = '{op: op, phys: phys, va: va, wdata: wdata, be: be};
    while (!core_req_ready) @(negedge clk);
    ptw0 = n_ptw; b0 = banks_rd_acc;
    @(negedge clk);
    core_req_valid = 0;
    lat = 1;
    while (!core_resp_valid && lat < 200) begin @(negedge clk); lat++; end
    check(core_resp_valid, "core response timeout");
    old = gword(pa[39:3]);
    for (int i = 0; i < 8; i++) nw[i*8 +: 8] = (op == OP_STORE && be[i]) ? wdata[i*8 +: 8] : old[i*8 +: 8];
    if (op == OP_LOAD) check(core_resp.rdata == old, $sformatf("load va %h pa %h got %h exp %h", va, pa, core_resp.rdata, old));
    else gold[pa[39:3]] = nw;
    if (n_ptw == ptw0) check(core_resp.superpage == exp_sp, $sformatf("superpage flag va %h", va));
    if (core_resp.l1_hit) begin
      if (n_ptw == ptw0) begin
        check(lat == (exp_sp ? SP_LAT : BASE_LAT), $sformatf("hit latency %0d (superpage=%0b) va %h", lat, exp_sp, va));
        // banks read during the lookup (plus the response cycle's edge)
        check(banks_rd_acc - b0 + $countones(bank_rd) == (exp_sp ? 1 : NB) || (banks_rd_acc - b0 == (exp_sp ? 1 : NB)),
              $sformatf("banks read %0d", banks_rd_acc - b0));
        check(core_resp.banks_read == (exp_sp ? 4'd1 : 4'(NB)), "banks_read field");
      end
      if (exp_sp) n_sp_hit++; else n_base_hit++;
      if (op == OP_STORE) n_store_hit++;
      if (!exp_sp && va[12] != pa[12]) n_xbank++;
    end else begin
      if (exp_sp) n_sp_fill++; else n_base_fill++;
    end
    if (phys) n_bypass++;
  endtask

  task automatic coh_access(input coh_op_e op, input pa_t pa);
    int b0; logic [511:0] gl;
    @(negedge clk);
    coh_req_valid = 1; coh_req = '{op: op, pa: {pa[39:6], 6'b0}};
    check(coh_req_ready, "coherence request accepted when idle");
    b0 = banks_rd_acc;
    #1;
    check($countones(bank_rd) == 1, "coherence lookup reads one bank");
    @(negedge clk);
    coh_req_valid = 0;
    check(coh_resp_valid, "coherence response one cycle after acceptance");
    gl = gline(pa[39:6]);
    if (coh_resp.hit) begin
      n_coh_hit++;
      check(coh_resp.line == gl, $sformatf("coherence line %h", pa));
      if (coh_resp.dirty) l2mem[pa[39:6]] = coh_resp.line;
    end else begin
      check(mline(pa[39:6]) == gl, $sformatf("coherence miss, L2 must be up to date %h", pa));
    end
    case (op)
      COH_READ: n_coh_read++;
      COH_INV:  n_coh_inv++;
      default:  n_coh_wb++;
    endcase
    if (op == COH_INV && coh_resp.hit) begin
      // the line must be gone
      @(negedge clk);
      coh_req_valid = 1; coh_req = '{op: COH_READ, pa: {pa[39:6], 6'b0}};
      @(negedge clk);
      coh_req_valid = 0;
      check(!coh_resp.hit, "line present after invalidation");
    end
  endtask

  task automatic invlpg(input va_t va, input bit sweep);
    int sz; logic [27:0] pn; pa_t pa; int cyc; int wb0, ptw0;
    pa = translate(va, sz, pn);
    wb0 = n_wb;
    @(negedge clk);
    inv_req_valid = 1; inv_req = '{va: va, sweep: sweep, ppn: pn};
    while (!inv_req_ready) @(negedge clk);
    @(negedge clk);
    inv_req_valid = 0;
    cyc = 1;
    while (!inv_done && cyc < 1000) begin @(negedge clk); cyc++; end
    check(inv_done, "invlpg done");
    if (sweep) begin
      n_sweep++;
      n_sweep_wb += n_wb - wb0;
      // one set per cycle plus writebacks stalled by the L2
      check(cyc <= 200, $sformatf("sweep took %0d cycles", cyc));
      for (int s = 0; s < 64; s++) begin
        @(negedge clk);
        coh_req_valid = 1; coh_req = '{op: COH_READ, pa: {pn, 6'(s), 6'b0}};
        @(negedge clk);
        coh_req_valid = 0;
        check(!coh_resp.hit, "line of a swept page still cached");
        check(mline({pn, 6'(s)}) == gline({pn, 6'(s)}), "swept page written back");
      end
    end
    n_invlpg++;
    // the translation is gone: the next access walks the page table
    ptw0 = n_ptw;
    core_access(OP_LOAD, va, 0, 0, 0);
    check(n_ptw == ptw0 + 1, "TLB entry invalidated by invlpg");
  endtask

  // random addresses concentrated on few sets so that lines get evicted
  function automatic va_t rand_va(input int kind);
    logic [5:0] set;
    logic [2:0] w;
    set = 6'($urandom_range(0, 3));
    w = 3'($urandom_range(0, 7));
    case (kind)
      0: return VA2M + 48'($urandom_range(0, 1)) * 48'h20_0000 + 48'($urandom_range(0, 3)) * 48'h2000
                 + 48'($urandom_range(0, 1)) * 48'h1000 + 48'({set, w, 3'b0});
      1: return VA1G + 48'($urandom_range(0, 3)) * 48'h20_0000 + 48'($urandom_range(0, 3)) * 48'h2000
                 + 48'($urandom_range(0, 1)) * 48'h1000 + 48'({set, w, 3'b0});
      2: return VA4K + 48'($urandom_range(0, 15)) * 48'h1000 + 48'({set, w, 3'b0});
      default: return 48'(PHYS) + 48'($urandom_range(0, 7)) * 48'h1000 + 48'({set, w, 3'b0});
    endcase
  endfunction

  initial begin
    va_t v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Directed: each page size, first a miss (walk + refill), then hits.
    v = VA2M + 48'h1_2340;
    core_access(OP_LOAD, v, 0, 0, 0);
    core_access(OP_LOAD, v, 0, 0, 0);
    core_access(OP_STORE, v, 0, 64'h1122_3344_5566_7788, 8'h0F);
    core_access(OP_LOAD, v, 0, 0, 0);
    v = VA1G + 48'h0123_4580;
    core_access(OP_LOAD, v, 0, 0, 0);
    core_access(OP_LOAD, v, 0, 0, 0);
    v = VA4K + 48'h2_0040;          // VA[12]=0, PA[12]=1
    core_access(OP_LOAD, v, 0, 0, 0);
    core_access(OP_LOAD, v, 0, 0, 0);
    core_access(OP_STORE, v, 0, 64'hDEAD_BEEF_CAFE_F00D, 8'hFF);
    core_access(OP_LOAD, v, 0, 0, 0);
    core_access(OP_LOAD, 48'(PHYS) + 48'h40, 1, 0, 0);
    core_access(OP_LOAD, 48'(PHYS) + 48'h40, 1, 0, 0);

    // Random mix.
    for (int i = 0; i < N_RANDOM; i++) begin
      int r, kind, k;
      r = $urandom_range(0, 99);
      if (r < 80) begin
        kind = $urandom_range(0, 9);
        kind = (kind < 4) ? 0 : (kind < 5) ? 1 : (kind < 9) ? 2 : 3;
        v = rand_va(kind);
        if ($urandom_range(0, 2) == 0)
          core_access(OP_STORE, v, kind == 3, {$urandom, $urandom}, 8'($urandom_range(1, 255)));
        else
          core_access(OP_LOAD, v, kind == 3, 0, 0);
      end else begin
        int sz; logic [27:0] pn; pa_t pa;
        kind = $urandom_range(0, 2);
        v = rand_va(kind);
        pa = translate(v, sz, pn);
        coh_access(coh_op_e'($urandom_range(0, 2)), pa);
      end
      if (i % 1000 == 500) begin
        // demote/promote a 4 kB page: invalidate its translation and sweep it
        k = $urandom_range(0, 15);
        for (int s = 0; s < 4; s++)
          core_access(OP_STORE, VA4K + 48'(k) * 48'h1000 + 48'(s * 64), 0, {$urandom, $urandom}, 8'hFF);
        invlpg(VA4K + 48'(k) * 48'h1000, 1);
      end
      if (i % 1000 == 900) invlpg(VA2M + 48'h20_0000, 0);
    end

    // Every mechanism must have happened.
    check(n_sp_hit > 0, "superpage 1-cycle hits");
    check(n_base_hit > 0, "base-page 2-cycle hits");
    check(n_xbank > 0, "base-page hits where VA[12] != PA[12]");
    check(n_sp_fill > 0, "superpage misses");
    check(n_base_fill > 0, "base-page misses");
    check(n_store_hit > 0, "store hits");
    check(n_refill > 0, "refills");
    check(n_wb > 0, "dirty writebacks");
    check(n_ptw > 0, "page walks");
    check(n_bypass > 0, "TLB-bypass accesses");
    check(n_coh_read > 0 && n_coh_inv > 0 && n_coh_wb > 0, "coherence lookups of each kind");
    check(n_coh_hit > 0, "coherence hits");
    check(n_sweep > 0 && n_sweep_wb > 0, "sweeps with writebacks");
    check(n_invlpg > 0, "invlpg");
    $display("mechanisms: sp_hit=%0d base_hit=%0d xbank_hit=%0d sp_fill=%0d base_fill=%0d store_hit=%0d refill=%0d wb=%0d ptw=%0d bypass=%0d coh r/i/w=%0d/%0d/%0d coh_hit=%0d sweep=%0d sweep_wb=%0d invlpg=%0d",
             n_sp_hit, n_base_hit, n_xbank, n_sp_fill, n_base_fill, n_store_hit, n_refill, n_wb, n_ptw,
             n_bypass, n_coh_read, n_coh_inv, n_coh_wb, n_coh_hit, n_sweep, n_sweep_wb, n_invlpg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
