// query_batch_manager: the two query batches in the SSD's internal DRAM.
//
// The host sends its sorted query k-mers to the SSD in batches. Two batch
// slots live in internal DRAM so that the transfer of batch i overlaps the
// intersection finding on batch i-1. Every channel's Intersect unit walks
// each batch from start to end at its own pace (its database share differs),
// so a slot is free again only when every participating channel has read
// its last k-mer.
//
// Interface
//   push_*    a batch has been written to DRAM: push_len k-mers (>= 1). With
//             push_use_base it lies at push_base (used to stream a region
//             such as the intersecting k-mers); otherwise in the slot whose
//             base address is fill_base. push_ready is low while both slots
//             are busy: this is where the host transfer stalls.
//   push_mask channels that read this batch; the others skip it.
//   rd_valid[c], rd_addr[c], rd_last[c]   channel c's next query k-mer
//   pop[c]    channel c consumed it
//   retire    pulse: the oldest batch was released
//   empty     no batch held
// Timing: one k-mer per channel per cycle; a push is visible to the channels
// in the next cycle; a slot retires one cycle after its last pop.
//
// From the paper: two batches (B#i-1, B#i) of 1 MiB for an 8-channel SSD
// with 4 dies/channel, 2 planes/die and 16 KiB pages (Sec. 4.3.1, Fig. 6).
// The slot addresses, the 16-byte k-mer slot and the release rule are this
// design's choices.
module query_batch_manager #(
  parameter int unsigned N_CH       = 8,
  parameter int unsigned ADDR_W     = 32,
  parameter int unsigned LEN_W      = 32,
  parameter int unsigned KMER_BYTES = 16,
  parameter logic [ADDR_W-1:0] SLOT_BYTES = ADDR_W'(1 << 20),
  parameter logic [ADDR_W-1:0] BASE       = '0
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            push_valid,
  output logic                            push_ready,
  input  logic [LEN_W-1:0]                push_len,
  input  logic                            push_use_base,
  input  logic [ADDR_W-1:0]               push_base,
  input  logic [N_CH-1:0]                 push_mask,
  output logic [ADDR_W-1:0]               fill_base,
  output logic [N_CH-1:0]                 rd_valid,
  output logic [N_CH-1:0][ADDR_W-1:0]     rd_addr,
  output logic [N_CH-1:0]                 rd_last,
  input  logic [N_CH-1:0]                 pop,
  output logic                            retire,
  output logic                            empty
);

  logic [1:0]                   s_valid;
  logic [1:0][LEN_W-1:0]        s_len;
  logic [1:0][ADDR_W-1:0]       s_base;
  logic [1:0][N_CH-1:0]         s_done;
  logic                         wr_ptr, ret_ptr;
  logic [N_CH-1:0][LEN_W-1:0]   idx;
  logic [N_CH-1:0]              sel;   // slot channel c reads

  assign push_ready = !s_valid[wr_ptr];
  assign fill_base  = BASE + (wr_ptr ? SLOT_BYTES : '0);
  assign empty      = !s_valid[0] && !s_valid[1];
  assign retire     = s_valid[ret_ptr] && (&s_done[ret_ptr]);

  // a channel finishes batches in order, so its current batch is the
  // oldest one it is not done with
  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      sel[c]      = (s_valid[ret_ptr] && !s_done[ret_ptr][c]) ? ret_ptr : !ret_ptr;
      rd_valid[c] = s_valid[sel[c]] && !s_done[sel[c]][c];
      rd_addr[c]  = s_base[sel[c]] + ADDR_W'(idx[c] * KMER_BYTES);
      rd_last[c]  = (idx[c] == s_len[sel[c]] - 1'b1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= '0;
      s_len   <= '0;
      s_base  <= '0;
      s_done  <= '0;
      wr_ptr  <= 1'b0;
      ret_ptr <= 1'b0;
      idx     <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        if (pop[c] && rd_valid[c]) begin
          if (rd_last[c]) begin
            s_done[sel[c]][c] <= 1'b1;
            idx[c]            <= '0;
          end else begin
            idx[c] <= idx[c] + 1'b1;
          end
        end
      end
      if (retire) begin
        s_valid[ret_ptr] <= 1'b0;
        ret_ptr          <= !ret_ptr;
      end
      if (push_valid && push_ready) begin
        s_valid[wr_ptr] <= 1'b1;
        s_len[wr_ptr]   <= push_len;
        s_base[wr_ptr]  <= push_use_base ? push_base : fill_base;
        s_done[wr_ptr]  <= ~push_mask;
        wr_ptr          <= !wr_ptr;
      end
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          push_valid && push_ready |-> push_len != '0);
  a_pop: assert property (@(posedge clk) disable iff (!rst_n)
                          (pop & ~rd_valid) == '0);

endmodule
