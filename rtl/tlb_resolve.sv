// tlb_resolve: the glue between the split L1 TLBs and the cache comparators.
//
// It holds the two AND gates of the VESPA datapath and the address-tag
// selection. The 2 MB and 1 GB TLB misses are ANDed into the single
// "2MB/1GB TLB miss" signal that tells the cache its superpage guess failed
// (and that opens the remaining banks through the bank decoder). That signal
// ANDed with the 4 kB TLB miss requests a page walk. The physical tag sent
// to the comparators is PA[PA_W-1:12]; for a superpage it is the superpage
// frame number followed by the virtual page-offset bits above bit 11,
// because those bits are not translated. When both superpage TLBs hit the
// 1 GB entry wins (this design's choice; it cannot happen with a consistent
// page table). Purely combinational: valid whenever the TLB outputs are.
module tlb_resolve
  import vespa_pkg::*;
(
  input  va_t                va,
  input  logic               hit_4k,
  input  logic [PPN4K_W-1:0] ppn_4k,
  input  logic               hit_2m,
  input  logic [PPN2M_W-1:0] ppn_2m,
  input  logic               hit_1g,
  input  logic [PPN1G_W-1:0] ppn_1g,
  output logic               sp_miss,
  output logic               page_walk,
  output tag_t               sp_tag,
  output tag_t               base_tag
);
  assign sp_miss   = (!hit_2m) & (!hit_1g);
  assign page_walk = (!hit_4k) & sp_miss;

  assign base_tag = ppn_4k;
  assign sp_tag   = hit_1g ? {ppn_1g, va[OFF1G-1:OFF4K]} : {ppn_2m, va[OFF2M-1:OFF4K]};
endmodule
