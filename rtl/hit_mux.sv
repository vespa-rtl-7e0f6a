// hit_mux: the output multiplexer of the banked L1.
//
// VESPA replaces the single 8:1 way multiplexer of an 8-way set with a 4:1
// multiplexer inside each bank followed by a small multiplexer between the
// banks (2:1 for the 32 kB cache). This module is that two-level selection,
// driven by the one-hot comparator outputs: it forwards the hitting line and
// reports whether, and where (bank and way), the hit was. The AND-OR form of
// the multiplexers is this design's choice; at most one comparator is
// expected to be high. Purely combinational.
module hit_mux #(
  parameter int unsigned NUM_BANKS = 2,
  parameter int unsigned WAYS      = 4,
  parameter int unsigned LINE_W    = 512,
  localparam int unsigned BANK_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [WAYS-1:0]   hit  [NUM_BANKS],
  input  logic [LINE_W-1:0] data [NUM_BANKS][WAYS],
  output logic              any_hit,
  output logic [BANK_W-1:0] hit_bank,
  output logic [WAY_W-1:0]  hit_way,
  output logic [LINE_W-1:0] line
);
  logic [LINE_W-1:0] bank_line [NUM_BANKS];
  logic [NUM_BANKS-1:0] bank_hit;

  // Level 1: WAYS:1 inside each bank.
  always_comb begin
    for (int unsigned b = 0; b < NUM_BANKS; b++) begin
      bank_line[b] = '0;
      bank_hit[b]  = |hit[b];
      for (int unsigned w = 0; w < WAYS; w++)
        bank_line[b] = bank_line[b] | ({LINE_W{hit[b][w]}} & data[b][w]);
    end
  end

  // Level 2: NUM_BANKS:1 between the banks.
  always_comb begin
    line     = '0;
    hit_bank = '0;
    hit_way  = '0;
    for (int unsigned b = 0; b < NUM_BANKS; b++) begin
      line = line | ({LINE_W{bank_hit[b]}} & bank_line[b]);
      if (bank_hit[b]) hit_bank = BANK_W'(b);
      for (int unsigned w = 0; w < WAYS; w++)
        if (hit[b][w]) hit_way = WAY_W'(w);
    end
    any_hit = |bank_hit;
  end
endmodule
