// kmer_intersect: the per-channel Intersect unit of MegIS.
//
// Compares a k-mer from the SSD's internal DRAM (a, a query or an
// intersecting k-mer) with the current k-mer read from the channel's flash
// stream (b). k-mers are MSB-first at two bits per base, so an unsigned
// compare is lexicographic order. Only the first plen bases are compared
// (the rest masked off), which lets the same unit match a kmax-mer and, in
// taxID retrieval, the prefix of an intersecting k-mer against a smaller
// k-mer; plen = W/2 (or larger) compares whole k-mers.
//
// Interface: purely combinational, exactly one of lt/eq/gt is high:
//   lt  a < b  (advance the DRAM side)
//   eq  a == b (record a match)
//   gt  a > b  (advance the flash side)
// The control unit turns these results into advance/record signals.
//
// From the paper: one 120-bit comparator per channel (Table 2) whose equal /
// smaller / larger results drive intersection finding. The prefix mask is
// this design's way of serving the smaller-k lookups of Fig. 8 with the
// same unit.
module kmer_intersect #(
  parameter int unsigned W      = 120,
  parameter int unsigned PLEN_W = $clog2(W / 2 + 1)
) (
  input  logic [W-1:0]      a,
  input  logic [W-1:0]      b,
  input  logic [PLEN_W-1:0] plen,
  output logic              lt,
  output logic              eq,
  output logic              gt
);

  logic [W-1:0] mask;
  logic [W-1:0] am, bm;

  always_comb begin
    if (int'(plen) >= W / 2) mask = '1;
    else                     mask = ~({W{1'b1}} >> (2 * int'(plen)));
    am = a & mask;
    bm = b & mask;
    eq = (am == bm);
    lt = (am < bm);
    gt = !eq && !lt;
  end

endmodule
