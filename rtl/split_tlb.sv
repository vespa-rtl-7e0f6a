// split_tlb: one L1 TLB of a split TLB organisation (one page size).
//
// The VESPA cache relies on the split L1 TLBs that x86 cores already have:
// one TLB per page size, probed in parallel. Because a superpage TLB has
// fewer and narrower entries, it answers sooner than the 4 kB TLB, and that
// earlier answer is what tells the cache whether its single-bank
// (superpage) guess was right. This module is one such TLB; the cache
// instantiates it for 4 kB (64 entries, 2 cycles), 2 MB (32 entries,
// 1 cycle) and 1 GB (8 entries, 1 cycle) pages, the entry counts of the
// Sandybridge example and the latencies of the 32 kB / 1.33 GHz design
// point. The fully associative organisation, round-robin fill and the
// register pipeline used to model the latency are this design's choices.
//
// Interface and timing: lookup_valid/lookup_vpn start a lookup. The entries
// are matched in that cycle and the result travels through LAT registers, so
// resp_valid pulses LAT cycles later. hit and ppn keep the result of the
// last lookup until the next one arrives, so that miss signals are levels.
// fill_* installs a translation (an entry with the same VPN is overwritten,
// otherwise the round-robin victim). inval_* clears any entry of that VPN.
module split_tlb #(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned VPN_W   = 36,
  parameter int unsigned PPN_W   = 28,
  parameter int unsigned LAT     = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lookup_valid,
  input  logic [VPN_W-1:0] lookup_vpn,
  output logic             resp_valid,
  output logic             hit,
  output logic [PPN_W-1:0] ppn,
  input  logic             fill_valid,
  input  logic [VPN_W-1:0] fill_vpn,
  input  logic [PPN_W-1:0] fill_ppn,
  input  logic             inval_valid,
  input  logic [VPN_W-1:0] inval_vpn
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0]           valid_q;
  logic [VPN_W-1:0]             vpn_q [ENTRIES];
  logic [PPN_W-1:0]             ppn_q [ENTRIES];
  logic [IDX_W-1:0]             rr_q;

  // Associative match of the lookup.
  logic             m_hit;
  logic [PPN_W-1:0] m_ppn;
  always_comb begin
    m_hit = 1'b0;
    m_ppn = '0;
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      if (valid_q[e] && vpn_q[e] == lookup_vpn) begin
        m_hit = 1'b1;
        m_ppn = m_ppn | ppn_q[e];
      end
    end
  end

  // Fill target: the entry already holding fill_vpn, else round robin.
  logic             f_found;
  logic [IDX_W-1:0] f_idx;
  always_comb begin
    f_found = 1'b0;
    f_idx   = rr_q;
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      if (!f_found && valid_q[e] && vpn_q[e] == fill_vpn) begin
        f_found = 1'b1;
        f_idx   = IDX_W'(e);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rr_q    <= '0;
    end else begin
      if (inval_valid) begin
        for (int unsigned e = 0; e < ENTRIES; e++)
          if (vpn_q[e] == inval_vpn) valid_q[e] <= 1'b0;
      end
      if (fill_valid) begin
        valid_q[f_idx] <= 1'b1;
        if (!f_found) rr_q <= (rr_q == IDX_W'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      vpn_q[f_idx] <= fill_vpn;
      ppn_q[f_idx] <= fill_ppn;
    end
  end

  // Latency pipeline. Stage LAT-1 is the visible, held result.
  logic [LAT-1:0]   pv_q;
  logic             ph_q [LAT];
  logic [PPN_W-1:0] pp_q [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv_q <= '0;
      for (int unsigned s = 0; s < LAT; s++) begin
        ph_q[s] <= 1'b0;
        pp_q[s] <= '0;
      end
    end else begin
      pv_q[0] <= lookup_valid;
      if (lookup_valid) begin
        ph_q[0] <= m_hit;
        pp_q[0] <= m_ppn;
      end
      for (int unsigned s = 1; s < LAT; s++) begin
        pv_q[s] <= pv_q[s-1];
        if (pv_q[s-1]) begin
          ph_q[s] <= ph_q[s-1];
          pp_q[s] <= pp_q[s-1];
        end
      end
    end
  end

  assign resp_valid = pv_q[LAT-1];
  assign hit        = ph_q[LAT-1];
  assign ppn        = pp_q[LAT-1];

  initial begin
    assert (LAT >= 1) else $error("split_tlb: LAT must be at least 1");
  end
endmodule
