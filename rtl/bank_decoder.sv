// bank_decoder: the VESPA bank decoder in front of the cache banks.
//
// Bank b is enabled when the bank index equals b, or when the 2MB/1GB TLB
// miss signal is high. A lookup therefore first opens only the bank that the
// virtual bank-index bits point at (the superpage guess); once the superpage
// TLBs report a miss, every bank is enabled so the rest of the set can be
// read. For two banks this is the pair of OR gates in front of the banks,
// one fed by VA[12] and one by its complement; for four banks it is the
// AND-then-OR network (VA[13:12] decoded by four AND gates) the paper
// sketches for 64 kB. Purely combinational.
module bank_decoder #(
  parameter int unsigned NUM_BANKS = 2,
  localparam int unsigned BI_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic [BI_W-1:0]      bank_index,
  input  logic                 sp_miss,
  output logic [NUM_BANKS-1:0] bank_en
);
  always_comb begin
    for (int unsigned b = 0; b < NUM_BANKS; b++)
      bank_en[b] = (bank_index == BI_W'(b)) | sp_miss;
  end
endmodule
