// l2p_sequencer: sequential page addressing of a database on one channel.
//
// MegIS FTL stores each database evenly and sequentially across all
// channels, database page g going to channel g mod N, and every channel's
// active block at the same page offset. Its L2P mapping is therefore only a
// start address, the database size and, per channel, the sequence of
// physical blocks holding the data. Reading the database back is a walk:
// the page address is incremented inside a physical block and reset to
// page 0 when the next block of the sequence is taken.
//
// Interface
//   start       begin a walk of n_pages pages (n_pages >= 1) at page
//               start_page of the first block in the channel's sequence
//   bt_idx      position in the channel's block sequence (a small table in
//               internal DRAM); bt_pba/bt_valid return that entry
//   req_*       page-read requests to the channel's flash controller;
//               req_last marks the final page of the database on this channel
//   busy        a walk is in progress
// Timing: one request per cycle when req_ready and bt_valid are high.
//
// From the paper: the block-level L2P (start address, size, block sequence),
// increment-within-block / reset-on-next-block walk and the round-robin
// layout (Sec. 4.5, Fig. 10). PAGES_PER_BLOCK = 768 follows the 12 MB block
// of Sec. 4.5 with 16 KiB pages. In the paper this walk is done by the FTL
// firmware; here it is a small hardware sequencer per channel so the
// accelerator can be simulated on its own.
module l2p_sequencer #(
  parameter int unsigned PAGES_PER_BLOCK = 768,
  parameter int unsigned PBA_W           = 32,
  parameter int unsigned PAGE_W          = $clog2(PAGES_PER_BLOCK),
  parameter int unsigned NPG_W           = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [PAGE_W-1:0] start_page,
  input  logic [NPG_W-1:0]  n_pages,
  output logic [NPG_W-1:0]  bt_idx,
  input  logic [PBA_W-1:0]  bt_pba,
  input  logic              bt_valid,
  output logic              req_valid,
  output logic [PBA_W-1:0]  req_pba,
  output logic [PAGE_W-1:0] req_page,
  output logic              req_last,
  input  logic              req_ready,
  output logic              busy
);

  logic [NPG_W-1:0] remaining;
  logic             fire;

  assign req_valid = busy && bt_valid;
  assign req_pba   = bt_pba;
  assign req_last  = (remaining == NPG_W'(1));
  assign fire      = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      remaining <= '0;
      bt_idx    <= '0;
      req_page  <= '0;
    end else if (start) begin
      busy      <= (n_pages != '0);
      remaining <= n_pages;
      bt_idx    <= '0;
      req_page  <= start_page;
    end else if (fire) begin
      remaining <= remaining - 1'b1;
      if (req_last) busy <= 1'b0;
      if (int'(req_page) == PAGES_PER_BLOCK - 1) begin
        req_page <= '0;
        bt_idx   <= bt_idx + 1'b1;
      end else begin
        req_page <= req_page + 1'b1;
      end
    end
  end

  a_page: assert property (@(posedge clk) disable iff (!rst_n)
                           busy |-> int'(req_page) < PAGES_PER_BLOCK);

endmodule
