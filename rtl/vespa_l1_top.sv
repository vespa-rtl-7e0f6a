// vespa_l1_top: VESPA L1 data cache with its split L1 TLBs.
//
// A VIPT cache must take its set index from the page offset, so with 4 kB
// pages a 32 kB cache can have only 64 sets and must be 8-way. VESPA keeps
// the 64 sets but splits each set into two banks of 4 ways and uses VA[12]
// as a bank index. VA[12] lies inside the page offset of a 2 MB or 1 GB
// superpage, so for superpage data it is already a physical address bit and
// only one bank needs to be searched. Every lookup therefore guesses
// "superpage": it reads just the bank VA[12] selects. The 2 MB / 1 GB TLBs
// are faster than the 4 kB TLB; if one of them hits, the lookup ends after
// SP_LAT cycles having read 4 ways. If both miss, the bank decoder opens the
// remaining bank(s), and the lookup ends with the 4 kB TLB after BASE_LAT
// cycles having read all 8 ways, as a conventional VIPT cache would. When
// all TLBs miss a page walk is requested and the access is replayed.
//
// Lines are always installed in the bank named by the physical bank-index
// bits, with LRU among that bank's ways (4way insertion policy). Hence a
// coherence lookup, which carries a physical address, reads only one bank.
// Accesses that carry a physical address already (TLB bypass, e.g. page
// table walker loads) are looked up like superpage accesses. An invlpg
// request invalidates the TLB entries of the page and, if asked, sweeps the
// bank that holds a demoted base page, evicting (and writing back) its lines:
// one set per cycle, 65 cycles plus writebacks.
//
// The bank decoder, the TLB miss AND gates, the banked array with per-bank
// 4:1 muxes and a final bank mux, the timing of Table-I style lookups, the
// insertion policy, coherence, bypass and sweep behaviour follow the paper.
// This design's own choices: a blocking cache with one access in flight (a
// new request is accepted in the cycle after a response), write-back and
// write-allocate stores, priority coherence > invlpg > core, page walks that
// always succeed, and the handshakes below.
//
// Interfaces (valid/ready handshakes; responses are single-cycle pulses):
//   core_req_*  : load/store, 64-bit word, byte enables, phys = TLB bypass.
//   core_resp_* : data, L1 hit, superpage, banks read. A superpage hit
//                 responds SP_LAT cycles after the request was accepted, a
//                 base-page hit BASE_LAT cycles after.
//   mem_req_*   : line refill request to the L2; mem_resp_* returns the line.
//   mem_wb_*    : dirty line written back to the L2.
//   ptw_req_*   : page walk request with the VA; ptw_resp_* returns page
//                 size and frame number, which is installed in the right TLB.
//   coh_req_*   : coherence lookup (read / invalidate / writeback), answered
//                 on coh_resp_* one cycle after acceptance.
//   inv_req_*   : invlpg, with optional sweep; inv_done pulses at the end.
//   bank_rd     : which banks are read this cycle (activity, for energy).
module vespa_l1_top
  import vespa_pkg::*;
#(
  parameter int unsigned NUM_BANKS     = 2,
  parameter int unsigned WAYS          = 4,
  parameter int unsigned SP_LAT        = 1,
  parameter int unsigned BASE_LAT      = 2,
  parameter int unsigned TLB4K_ENTRIES = 64,
  parameter int unsigned TLB2M_ENTRIES = 32,
  parameter int unsigned TLB1G_ENTRIES = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // core
  input  logic                  core_req_valid,
  output logic                  core_req_ready,
  input  core_req_t             core_req,
  output logic                  core_resp_valid,
  output core_resp_t            core_resp,
  // L2 refill and writeback
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output pa_t                   mem_req_addr,
  input  logic                  mem_resp_valid,
  input  line_t                 mem_resp_line,
  output logic                  mem_wb_valid,
  input  logic                  mem_wb_ready,
  output pa_t                   mem_wb_addr,
  output line_t                 mem_wb_line,
  // page walker
  output logic                  ptw_req_valid,
  input  logic                  ptw_req_ready,
  output va_t                   ptw_req_va,
  input  logic                  ptw_resp_valid,
  input  ptw_resp_t             ptw_resp,
  // coherence lookups from the L2 / directory
  input  logic                  coh_req_valid,
  output logic                  coh_req_ready,
  input  coh_req_t              coh_req,
  output logic                  coh_resp_valid,
  output coh_resp_t             coh_resp,
  // invlpg and L1 sweep
  input  logic                  inv_req_valid,
  output logic                  inv_req_ready,
  input  inv_req_t              inv_req,
  output logic                  inv_done,
  // bank activity
  output logic [NUM_BANKS-1:0]  bank_rd
);
  localparam int unsigned BANK_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned CNT_W  = $clog2(BASE_LAT + 1) + 1;
  localparam int unsigned WSEL_W = $clog2(LINE_BYTES / WORD_BYTES);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOK, S_MISS, S_WB, S_REFILL_REQ, S_REFILL_WAIT,
    S_PTW_REQ, S_PTW_WAIT, S_REPLAY, S_COH, S_SWEEP, S_SWEEP_WB
  } state_e;

  state_e                 state_q, state_d;
  core_req_t              r_req;
  logic [CNT_W-1:0]       r_cnt;
  logic [NUM_BANKS-1:0]   r_first_en;
  logic                   r_spmiss;
  pa_t                    r_pa;
  logic [WAY_W-1:0]       r_vic;
  logic                   r_sp;
  coh_req_t               r_coh;
  logic [PPN4K_W-1:0]     r_sweep_ppn;
  logic [SET_W-1:0]       r_sweep_set;
  logic                   r_inv_done;

  // ------------------------------------------------------------------
  // Split L1 TLBs and the miss logic
  // ------------------------------------------------------------------
  logic               issue;        // a core access starts its lookup
  core_req_t          issue_req;
  logic               tlb_lookup;
  logic               h4k, h2m, h1g;
  logic [PPN4K_W-1:0] p4k;
  logic [PPN2M_W-1:0] p2m;
  logic [PPN1G_W-1:0] p1g;
  logic               v4k, v2m, v1g;
  logic               fill4k, fill2m, fill1g, tlb_inval;
  logic               sp_miss, page_walk;
  tag_t               sp_tag, base_tag;

  assign issue_req  = (state_q == S_REPLAY) ? r_req : core_req;
  assign tlb_lookup = issue && !issue_req.phys;
  assign fill4k     = ptw_resp_valid && (state_q == S_PTW_WAIT) && ptw_resp.size == PG_4K;
  assign fill2m     = ptw_resp_valid && (state_q == S_PTW_WAIT) && ptw_resp.size == PG_2M;
  assign fill1g     = ptw_resp_valid && (state_q == S_PTW_WAIT) && ptw_resp.size == PG_1G;
  assign tlb_inval  = inv_req_valid && inv_req_ready;

  split_tlb #(.ENTRIES(TLB4K_ENTRIES), .VPN_W(VPN4K_W), .PPN_W(PPN4K_W), .LAT(BASE_LAT)) u_tlb4k (
    .clk, .rst_n,
    .lookup_valid(tlb_lookup), .lookup_vpn(issue_req.va[VA_W-1:OFF4K]),
    .resp_valid(v4k), .hit(h4k), .ppn(p4k),
    .fill_valid(fill4k), .fill_vpn(r_req.va[VA_W-1:OFF4K]), .fill_ppn(ptw_resp.ppn[PPN4K_W-1:0]),
    .inval_valid(tlb_inval), .inval_vpn(inv_req.va[VA_W-1:OFF4K]));

  split_tlb #(.ENTRIES(TLB2M_ENTRIES), .VPN_W(VPN2M_W), .PPN_W(PPN2M_W), .LAT(SP_LAT)) u_tlb2m (
    .clk, .rst_n,
    .lookup_valid(tlb_lookup), .lookup_vpn(issue_req.va[VA_W-1:OFF2M]),
    .resp_valid(v2m), .hit(h2m), .ppn(p2m),
    .fill_valid(fill2m), .fill_vpn(r_req.va[VA_W-1:OFF2M]), .fill_ppn(ptw_resp.ppn[PPN2M_W-1:0]),
    .inval_valid(tlb_inval), .inval_vpn(inv_req.va[VA_W-1:OFF2M]));

  split_tlb #(.ENTRIES(TLB1G_ENTRIES), .VPN_W(VPN1G_W), .PPN_W(PPN1G_W), .LAT(SP_LAT)) u_tlb1g (
    .clk, .rst_n,
    .lookup_valid(tlb_lookup), .lookup_vpn(issue_req.va[VA_W-1:OFF1G]),
    .resp_valid(v1g), .hit(h1g), .ppn(p1g),
    .fill_valid(fill1g), .fill_vpn(r_req.va[VA_W-1:OFF1G]), .fill_ppn(ptw_resp.ppn[PPN1G_W-1:0]),
    .inval_valid(tlb_inval), .inval_vpn(inv_req.va[VA_W-1:OFF1G]));

  tlb_resolve u_resolve (
    .va(r_req.va), .hit_4k(h4k), .ppn_4k(p4k), .hit_2m(h2m), .ppn_2m(p2m),
    .hit_1g(h1g), .ppn_1g(p1g), .sp_miss, .page_walk, .sp_tag, .base_tag);

  // ------------------------------------------------------------------
  // Bank decoder and banks
  // ------------------------------------------------------------------
  logic                 sp_phase, base_phase;  // the cycles the TLB results arrive
  logic                 open_rest;             // superpage guess failed
  logic [BANK_W-1:0]    dec_idx;
  logic [NUM_BANKS-1:0] dec_en;
  logic                 rd_fire;
  logic [SET_W-1:0]     rd_set;
  logic                 coh_fire, inv_fire;
  logic                 sweep_next;  // the sweep moves on to the next set

  assign sp_phase   = (state_q == S_LOOK) && !r_req.phys && (r_cnt == CNT_W'(SP_LAT));
  assign base_phase = (state_q == S_LOOK) && !r_req.phys && (r_cnt == CNT_W'(BASE_LAT));
  assign open_rest  = sp_phase && sp_miss;

  always_comb begin
    dec_idx = r_req.va[OFF4K +: BANK_W];
    rd_set  = r_req.va[OFF_W +: SET_W];
    rd_fire = 1'b0;
    if (coh_fire) begin
      dec_idx = coh_req.pa[OFF4K +: BANK_W];
      rd_set  = coh_req.pa[OFF_W +: SET_W];
      rd_fire = 1'b1;
    end else if (inv_fire) begin
      dec_idx = inv_req.ppn[BANK_W-1:0];
      rd_set  = '0;
      rd_fire = inv_req.sweep;
    end else if (issue) begin
      dec_idx = issue_req.va[OFF4K +: BANK_W];
      rd_set  = issue_req.va[OFF_W +: SET_W];
      rd_fire = 1'b1;
    end else if (open_rest) begin
      rd_fire = 1'b1;
    end else if (state_q == S_SWEEP || state_q == S_SWEEP_WB) begin
      dec_idx = r_sweep_ppn[BANK_W-1:0];
      rd_set  = r_sweep_set + 1'b1;
      rd_fire = sweep_next;
    end
  end

  bank_decoder #(.NUM_BANKS(NUM_BANKS)) u_dec (
    .bank_index(dec_idx), .sp_miss(open_rest), .bank_en(dec_en));

  // In the second lookup cycle only the banks not read yet are read.
  assign bank_rd = rd_fire ? (dec_en & ~(open_rest ? r_first_en : '0)) : '0;

  tag_t                 b_tag   [NUM_BANKS][WAYS];
  logic [WAYS-1:0]      b_valid [NUM_BANKS];
  logic [WAYS-1:0]      b_dirty [NUM_BANKS];
  line_t                b_data  [NUM_BANKS][WAYS];
  logic [NUM_BANKS-1:0] wr_en;
  logic [SET_W-1:0]     wr_set;
  logic [WAY_W-1:0]     wr_way;
  logic                 wr_meta, wr_valid, wr_dirty;
  tag_t                 wr_tag;
  logic [LINE_BYTES-1:0] wr_be;
  line_t                wr_data;
  logic                 lru_touch;
  logic [BANK_W-1:0]    lru_bank;
  logic [WAY_W-1:0]     lru_way;
  logic [WAY_W-1:0]     lru_vic [NUM_BANKS];

  // Compare inputs
  logic [NUM_BANKS-1:0] cmp_en;
  tag_t                 cmp_tag;
  logic [WAYS-1:0]      hit_v [NUM_BANKS];
  logic                 any_hit;
  logic [BANK_W-1:0]    hit_bank;
  logic [WAY_W-1:0]     hit_way;
  line_t                hit_line;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    l1_bank #(.SETS(SETS), .WAYS(WAYS), .LINE_BYTES(LINE_BYTES), .TAG_W(TAG_W)) u_bank (
      .clk, .rst_n,
      .rd_en(bank_rd[b]), .rd_set(rd_set),
      .rd_tag(b_tag[b]), .rd_valid(b_valid[b]), .rd_dirty(b_dirty[b]), .rd_data(b_data[b]),
      .wr_en(wr_en[b]), .wr_set, .wr_way, .wr_meta, .wr_tag, .wr_valid, .wr_dirty,
      .wr_byte_en(wr_be), .wr_data);

    bank_lru #(.SETS(SETS), .WAYS(WAYS)) u_lru (
      .clk, .rst_n,
      .touch_en(lru_touch && lru_bank == BANK_W'(b)), .touch_set(wr_set), .touch_way(lru_way),
      .vic_set(r_pa[OFF_W +: SET_W]), .victim(lru_vic[b]));

    tag_match #(.WAYS(WAYS), .TAG_W(TAG_W)) u_cmp (
      .en(cmp_en[b]), .tags(b_tag[b]), .valid(b_valid[b]), .addr_tag(cmp_tag), .hit(hit_v[b]));
  end

  hit_mux #(.NUM_BANKS(NUM_BANKS), .WAYS(WAYS), .LINE_W(LINE_W)) u_mux (
    .hit(hit_v), .data(b_data), .any_hit, .hit_bank, .hit_way, .line(hit_line));

  // ------------------------------------------------------------------
  // Control
  // ------------------------------------------------------------------
  logic              look_done;   // the lookup resolves this cycle
  logic              look_hit;
  tag_t              look_tag;
  logic              look_sp;
  logic              sweep_last;
  logic [BANK_W-1:0] miss_bank;
  logic [WAY_W-1:0]  vic_way;
  logic              vic_found;
  logic              store;

  assign store     = (r_req.op == OP_STORE);
  assign miss_bank = r_pa[OFF4K +: BANK_W];
  assign sweep_last = (r_sweep_set == SET_W'(SETS - 1));

  always_comb begin
    cmp_en  = '0;
    cmp_tag = '0;
    look_done = 1'b0;
    look_tag  = '0;
    look_sp   = 1'b0;
    if (state_q == S_LOOK) begin
      if (r_req.phys && r_cnt == CNT_W'(SP_LAT)) begin
        look_done = 1'b1;
        look_sp   = 1'b1;
        look_tag  = r_req.va[PA_W-1:OFF4K];
        cmp_en    = r_first_en;
      end else if (sp_phase && !sp_miss) begin
        look_done = 1'b1;
        look_sp   = 1'b1;
        look_tag  = sp_tag;
        cmp_en    = r_first_en;
      end else if (base_phase && r_spmiss && !page_walk) begin
        look_done = 1'b1;
        look_tag  = base_tag;
        cmp_en    = '1;
      end
      cmp_tag = look_tag;
    end else if (state_q == S_COH) begin
      cmp_tag = r_coh.pa[PA_W-1:OFF4K];
      for (int unsigned b = 0; b < NUM_BANKS; b++)
        cmp_en[b] = (r_coh.pa[OFF4K +: BANK_W] == BANK_W'(b));
    end else if (state_q == S_SWEEP || state_q == S_SWEEP_WB) begin
      cmp_tag = r_sweep_ppn;
      for (int unsigned b = 0; b < NUM_BANKS; b++)
        cmp_en[b] = (r_sweep_ppn[BANK_W-1:0] == BANK_W'(b));
    end
  end
  assign look_hit = look_done && any_hit;

  // Victim: an invalid way of the target bank, else its LRU way.
  always_comb begin
    vic_found = 1'b0;
    vic_way   = lru_vic[miss_bank];
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!vic_found && !b_valid[miss_bank][w]) begin
        vic_found = 1'b1;
        vic_way   = WAY_W'(w);
      end
    end
  end

  // Sweep: a set holds at most one line of the page. Move on unless that
  // line is dirty and its writeback has not been accepted yet.
  always_comb begin
    sweep_next = 1'b0;
    if (state_q == S_SWEEP)    sweep_next = !(any_hit && b_dirty[hit_bank][hit_way]) && !sweep_last;
    if (state_q == S_SWEEP_WB) sweep_next = mem_wb_ready && !sweep_last;
  end

  // Store data placed in the line.
  logic [WSEL_W-1:0]     wsel;
  logic [LINE_BYTES-1:0] st_be;
  line_t                 st_data;
  line_t                 fill_line;
  assign wsel    = r_req.va[OFF_W-1:$clog2(WORD_BYTES)];
  assign st_be   = LINE_BYTES'(r_req.be) << (wsel * WORD_BYTES);
  assign st_data = {(LINE_W/WORD_W){r_req.wdata}};
  always_comb begin
    for (int unsigned i = 0; i < LINE_BYTES; i++)
      fill_line[i*8 +: 8] = (store && st_be[i]) ? st_data[i*8 +: 8] : mem_resp_line[i*8 +: 8];
  end

  // Handshake outputs
  assign coh_fire       = (state_q == S_IDLE) && coh_req_valid;
  assign inv_fire       = (state_q == S_IDLE) && !coh_req_valid && inv_req_valid;
  assign coh_req_ready  = (state_q == S_IDLE);
  assign inv_req_ready  = (state_q == S_IDLE) && !coh_req_valid;
  assign core_req_ready = (state_q == S_IDLE) && !coh_req_valid && !inv_req_valid;
  assign issue          = (core_req_valid && core_req_ready) || (state_q == S_REPLAY);

  assign mem_req_valid = (state_q == S_REFILL_REQ);
  assign mem_req_addr  = {r_pa[PA_W-1:OFF_W], {OFF_W{1'b0}}};
  assign ptw_req_valid = (state_q == S_PTW_REQ);
  assign ptw_req_va    = r_req.va;
  assign inv_done      = r_inv_done;

  always_comb begin
    mem_wb_valid = 1'b0;
    mem_wb_addr  = '0;
    mem_wb_line  = '0;
    if (state_q == S_WB) begin
      mem_wb_valid = 1'b1;
      mem_wb_addr  = {b_tag[miss_bank][r_vic], r_pa[OFF_W +: SET_W], {OFF_W{1'b0}}};
      mem_wb_line  = b_data[miss_bank][r_vic];
    end else if (state_q == S_SWEEP_WB) begin
      mem_wb_valid = 1'b1;
      mem_wb_addr  = {r_sweep_ppn, r_sweep_set, {OFF_W{1'b0}}};
      mem_wb_line  = hit_line;
    end
  end

  // Responses
  always_comb begin
    core_resp_valid = 1'b0;
    core_resp       = '0;
    if (look_hit) begin
      core_resp_valid      = 1'b1;
      core_resp.rdata      = hit_line[wsel*WORD_W +: WORD_W];
      core_resp.l1_hit     = 1'b1;
      core_resp.superpage  = look_sp;
      core_resp.banks_read = look_sp ? 4'd1 : 4'(NUM_BANKS);
    end else if (state_q == S_REFILL_WAIT && mem_resp_valid) begin
      core_resp_valid      = 1'b1;
      core_resp.rdata      = fill_line[wsel*WORD_W +: WORD_W];
      core_resp.l1_hit     = 1'b0;
      core_resp.superpage  = r_sp;
      core_resp.banks_read = r_sp ? 4'd1 : 4'(NUM_BANKS);
    end
    coh_resp_valid = (state_q == S_COH);
    coh_resp.hit   = any_hit;
    coh_resp.dirty = any_hit && b_dirty[hit_bank][hit_way];
    coh_resp.line  = hit_line;
  end

  // Array writes and LRU updates
  always_comb begin
    wr_en     = '0;
    wr_set    = r_pa[OFF_W +: SET_W];
    wr_way    = hit_way;
    wr_meta   = 1'b0;
    wr_tag    = '0;
    wr_valid  = 1'b0;
    wr_dirty  = 1'b0;
    wr_be     = '0;
    wr_data   = st_data;
    lru_touch = 1'b0;
    lru_bank  = hit_bank;
    lru_way   = hit_way;
    if (look_hit) begin
      wr_set    = r_req.va[OFF_W +: SET_W];
      lru_touch = 1'b1;
      if (store) begin
        wr_en[hit_bank] = 1'b1;
        wr_meta  = 1'b1;
        wr_tag   = look_tag;
        wr_valid = 1'b1;
        wr_dirty = 1'b1;
        wr_be    = st_be;
      end
    end else if (state_q == S_REFILL_WAIT && mem_resp_valid) begin
      wr_en[miss_bank] = 1'b1;
      wr_way    = r_vic;
      wr_meta   = 1'b1;
      wr_tag    = r_pa[PA_W-1:OFF4K];
      wr_valid  = 1'b1;
      wr_dirty  = store;
      wr_be     = '1;
      wr_data   = fill_line;
      lru_touch = 1'b1;
      lru_bank  = miss_bank;
      lru_way   = r_vic;
    end else if (state_q == S_COH && any_hit && r_coh.op != COH_READ) begin
      wr_en[hit_bank] = 1'b1;
      wr_set   = r_coh.pa[OFF_W +: SET_W];
      wr_meta  = 1'b1;
      wr_tag   = r_coh.pa[PA_W-1:OFF4K];
      wr_valid = (r_coh.op == COH_WB);
      wr_dirty = 1'b0;
    end else if ((state_q == S_SWEEP && any_hit && !b_dirty[hit_bank][hit_way]) ||
                 (state_q == S_SWEEP_WB && mem_wb_ready)) begin
      wr_en[hit_bank] = 1'b1;
      wr_set   = r_sweep_set;
      wr_meta  = 1'b1;
      wr_tag   = r_sweep_ppn;
      wr_valid = 1'b0;
      wr_dirty = 1'b0;
    end
  end

  // Next state
  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_IDLE: begin
        if (coh_fire)                    state_d = S_COH;
        else if (inv_fire && inv_req.sweep) state_d = S_SWEEP;
        else if (issue)                  state_d = S_LOOK;
      end
      S_REPLAY:  state_d = S_LOOK;
      S_LOOK: begin
        if (look_done)                   state_d = look_hit ? S_IDLE : S_MISS;
        else if (base_phase && page_walk) state_d = S_PTW_REQ;
      end
      S_MISS:        state_d = (b_valid[miss_bank][vic_way] && b_dirty[miss_bank][vic_way]) ? S_WB : S_REFILL_REQ;
      S_WB:          if (mem_wb_ready)   state_d = S_REFILL_REQ;
      S_REFILL_REQ:  if (mem_req_ready)  state_d = S_REFILL_WAIT;
      S_REFILL_WAIT: if (mem_resp_valid) state_d = S_IDLE;
      S_PTW_REQ:     if (ptw_req_ready)  state_d = S_PTW_WAIT;
      S_PTW_WAIT:    if (ptw_resp_valid) state_d = S_REPLAY;
      S_COH:         state_d = S_IDLE;
      S_SWEEP: begin
        if (any_hit && b_dirty[hit_bank][hit_way]) state_d = S_SWEEP_WB;
        else if (sweep_last)             state_d = S_IDLE;
      end
      S_SWEEP_WB: begin
        if (mem_wb_ready)                state_d = sweep_last ? S_IDLE : S_SWEEP;
      end
      default:                           state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      r_req       <= '0;
      r_cnt       <= '0;
      r_first_en  <= '0;
      r_spmiss    <= 1'b0;
      r_pa        <= '0;
      r_vic       <= '0;
      r_sp        <= 1'b0;
      r_coh       <= '0;
      r_sweep_ppn <= '0;
      r_sweep_set <= '0;
      r_inv_done  <= 1'b0;
    end else begin
      state_q    <= state_d;
      r_inv_done <= 1'b0;
      if (issue) begin
        if (state_q == S_IDLE) r_req <= core_req;
        r_cnt      <= CNT_W'(1);
        r_first_en <= dec_en;
        r_spmiss   <= 1'b0;
      end else if (state_q == S_LOOK) begin
        r_cnt <= r_cnt + 1'b1;
      end
      if (sp_phase) r_spmiss <= sp_miss;
      if (look_done) begin
        r_pa <= {look_tag, r_req.va[OFF4K-1:0]};
        r_sp <= look_sp;
      end
      if (state_q == S_MISS) r_vic <= vic_way;
      if (coh_fire) r_coh <= coh_req;
      if (inv_fire) begin
        r_sweep_ppn <= inv_req.ppn;
        r_sweep_set <= '0;
        if (!inv_req.sweep) r_inv_done <= 1'b1;
      end
      if (sweep_next) r_sweep_set <= r_sweep_set + 1'b1;
      if ((state_q == S_SWEEP && state_d == S_IDLE) || (state_q == S_SWEEP_WB && state_d == S_IDLE))
        r_inv_done <= 1'b1;
    end
  end

  // ------------------------------------------------------------------
  // Checks
  // ------------------------------------------------------------------
  initial begin
    assert (BASE_LAT > SP_LAT) else $error("vespa_l1_top: BASE_LAT must exceed SP_LAT");
  end

  // The TLB results arrive exactly when the controller expects them.
  a_sp_tlb_timing: assert property (@(posedge clk) disable iff (!rst_n)
    sp_phase |-> (v2m && v1g));
  a_base_tlb_timing: assert property (@(posedge clk) disable iff (!rst_n)
    (base_phase && r_spmiss) |-> v4k);
  // At most one way of a set holds a given line.
  logic [NUM_BANKS*WAYS-1:0] hit_flat;
  always_comb
    for (int unsigned b = 0; b < NUM_BANKS; b++) hit_flat[b*WAYS +: WAYS] = hit_v[b];
  a_onehot_hit: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hit_flat));
  // Requests to the L2 and the walker are held until accepted.
  a_mem_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=> mem_req_valid);
  a_wb_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_wb_valid && !mem_wb_ready) |=> (mem_wb_valid && $stable(mem_wb_addr)));
  a_ptw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (ptw_req_valid && !ptw_req_ready) |=> ptw_req_valid);
endmodule
