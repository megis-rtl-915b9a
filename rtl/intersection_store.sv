// intersection_store: places the intersecting k-mers in the SSD's internal
// DRAM.
//
// During intersection finding every channel produces its own sorted stream
// of intersecting k-mers. The database pages are dealt round-robin over the
// channels, so every channel's stream spans the whole k-mer range and a
// given k-mer can only come from one channel. Each channel gets a fixed
// region of REGION_BYTES in DRAM, channel c at base + c * REGION_BYTES, and
// writes its k-mers there one after another, KMER_BYTES apart, so every
// region is a sorted list that taxID retrieval can stream. The regions are
// not sorted with respect to each other; how the per-channel intersections
// are combined into one sorted stream is not described in the paper, and a
// region can be handed to taxID retrieval on its own.
//
// Interface and timing:
//   clear      start of an intersection-finding operation: counts to zero,
//              base taken from base
//   wr_addr[c] DRAM address for channel c's next intersecting k-mer; valid
//              while the channel's output is offered
//   fire[c]    that k-mer was written (output handshake); the count and the
//              address advance in the same cycle
//   count[c]   k-mers stored by channel c so far (for firmware, to hand the
//              regions to taxID retrieval as batches)
//   full[c]    region c holds REGION_BYTES / KMER_BYTES k-mers: the channel
//              must hold its next result (back-pressure)
//
// Following the paper: the intersecting k-mers are kept in the internal DRAM
// for the taxID retrieval step. The paper notes that the set usually fits
// and, when it does not, has taxID retrieval run on the part already found
// before intersection finding resumes; that scheduling is firmware's, and
// this block supplies its hardware side by stopping a channel whose region
// is full. The per-channel regions, their size and the 16-byte slot are
// this design's choices.
module intersection_store #(
  parameter int unsigned        N_CH         = 8,
  parameter int unsigned        ADDR_W       = 32,
  parameter int unsigned        CNT_W        = 32,
  parameter int unsigned        KMER_BYTES   = 16,
  parameter logic [ADDR_W-1:0]  REGION_BYTES = ADDR_W'(1 << 24)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic [ADDR_W-1:0]           base,
  input  logic [N_CH-1:0]             fire,
  output logic [N_CH-1:0][ADDR_W-1:0] wr_addr,
  output logic [N_CH-1:0][CNT_W-1:0]  count,
  output logic [N_CH-1:0]             full
);

  localparam logic [CNT_W-1:0] CAP = CNT_W'(REGION_BYTES / ADDR_W'(KMER_BYTES));

  logic [N_CH-1:0][ADDR_W-1:0] ptr;

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      wr_addr[c] = ptr[c];
      full[c]    = (count[c] == CAP);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      count  <= '0;
    end else if (clear) begin
      for (int c = 0; c < N_CH; c++) begin
        ptr[c]   <= base + ADDR_W'(c) * REGION_BYTES;
        count[c] <= '0;
      end
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        if (fire[c]) begin
          ptr[c]   <= ptr[c] + ADDR_W'(KMER_BYTES);
          count[c] <= count[c] + 1'b1;
        end
      end
    end
  end

  // a full region takes no more k-mers
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) (fire & full) == '0);

endmodule
