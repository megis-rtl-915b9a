// index_generator: the Index Generator of MegIS' k-mer sketch streaming
// (KSS) taxID retrieval.
//
// KSS stores the kmax-mer sketches sorted, with their taxIDs, and for each
// smaller k only a table of taxIDs, one entry per distinct k-prefix of the
// sorted kmax-mers (the smaller k-mers themselves are not stored). While
// the kmax-mer sketches stream into the channel's k-mer registers, this unit
// compares the k-prefix of each incoming sketch with that of the one before
// it. A differing prefix starts a new smaller k-mer: new_prefix asks for the
// next taxID of the smaller-k table, and prefix_key is the k-mer it belongs
// to (the incoming sketch with everything past its first plen bases zeroed).
// The very first sketch after clear always starts a new prefix.
//
// Interface
//   plen      prefix length in bases, 1..G/2 (G = compare width, 64 bits)
//   in_key    the kmax-mer being pushed into the k-mer registers
//   in_fire   the push happens this cycle (updates the stored prefix)
//   new_prefix, prefix_key   combinational on in_key
//   index     number of distinct prefixes taken so far, i.e. the entry of
//             the smaller-k table that the current prefix uses (counts
//             from 0 after the first one)
// Timing: combinational compare, the stored prefix and index update on the
// clock edge of a fire.
//
// From the paper: compare the prefixes of consecutive kmax-mers, on a change
// read the next smaller-k taxID from a channel (Sec. 4.3.2, Fig. 8), 64 bits
// wide (Table 2). Keeping the last prefix in a register of its own (rather
// than comparing the Curr and Next registers) and the index counter are
// this design's choices; they give the same result and survive the
// registers running empty.
module index_generator #(
  parameter int unsigned W      = 120,
  parameter int unsigned G      = 64,
  parameter int unsigned PLEN_W = $clog2(W / 2 + 1),
  parameter int unsigned IDX_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [PLEN_W-1:0] plen,
  input  logic [W-1:0]      in_key,
  input  logic              in_fire,
  output logic              new_prefix,
  output logic [W-1:0]      prefix_key,
  output logic [IDX_W-1:0]  index
);

  logic [G-1:0] mask, pfx, last_pfx;
  logic         have_last;

  always_comb begin
    if (int'(plen) >= G / 2) mask = '1;
    else                     mask = ~({G{1'b1}} >> (2 * int'(plen)));
    pfx        = in_key[W-1 -: G] & mask;
    new_prefix = !have_last || (pfx != last_pfx);
    prefix_key = '0;
    prefix_key[W-1 -: G] = pfx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_last <= 1'b0;
      last_pfx  <= '0;
      index     <= '0;
    end else if (clear) begin
      have_last <= 1'b0;
      index     <= '0;
    end else if (in_fire) begin
      have_last <= 1'b1;
      last_pfx  <= pfx;
      if (new_prefix && have_last) index <= index + 1'b1;
    end
  end

endmodule
