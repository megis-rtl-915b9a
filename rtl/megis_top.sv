// megis_top: the MegIS in-storage accelerator in the SSD controller.
//
// MegIS speeds up metagenomic analysis by running its database-streaming
// steps inside the SSD. The host extracts and sorts the query k-mers of a
// sample and sends them in batches; inside the SSD, one small accelerator
// per flash channel compares them with the sorted k-mer database as it
// streams off that channel, so the large database never leaves the drive.
// The same per-channel hardware then looks up the taxIDs of the intersecting
// k-mers in k-mer sketch streaming (KSS) tables, and finally merges the
// reference indexes of the species found into one index for read mapping.
//
// Per channel c (N_CH of them):
//   l2p_sequencer      page addresses of the channel's database pages
//   kmer_register_pair Curr/Next registers filled from the flash stream
//   kmer_intersect     120-bit compare of a DRAM-side k-mer with Curr
//   index_generator    new-prefix detection for taxID level c (KSS)
// Shared:
//   control_unit       the one control unit / FSM of the SSD
//   query_batch_manager the two query batches in internal DRAM
//   intersection_store  DRAM addresses of the intersecting k-mers, one
//                       region per channel
//
// Ports (everything outside the accelerator is a port):
//   cmd_*   host storage-interface commands (MegIS_Init/Step/Write, exit)
//   op_*    operation start from the MegIS FTL firmware: mode, channel
//           mask, per-channel prefix length (bases; level 0 = kmax),
//           location offset of the second index (merge), start page and
//           per-channel page count of the database being streamed
//   bpush_* query batch descriptors (host DMA into internal DRAM is
//           outside); bfill_base is the DRAM slot to fill next;
//           bpush_last marks the last batch of a taxID retrieval, which
//           ends once that batch has been read
//   q_rd_*  per-channel read port into internal DRAM: address out, k-mer
//           back in the same cycle when q_rd_valid
//   bt_*    per-channel read of the L2P block sequence in internal DRAM
//   pr_*    per-channel page-read requests to the flash controllers
//   fl_*    per-channel records from the flash controllers after ECC
//   o_*     per-channel results: intersecting k-mers in MODE_INTERSECT,
//           with o_addr their DRAM address (region of channel c at
//           op_store_base + c * 16 MiB) and st_count the number stored;
//           taxIDs (to the host) in MODE_TAXID, unified
//           index entries (key = k-mer, aux = location, channel 0) in
//           MODE_MERGE
// Timing: one comparison per channel per cycle; a record taken from the
// flash stream is compared from the next cycle on. The paper's accelerator
// runs at 300 MHz, where one 120-bit record per cycle and channel
// (4.5 GB/s) is above the 1.2 GB/s channel I/O rate.
//
// From the paper: the per-channel units and the single control unit
// (Table 2), the data flow of Figs. 4, 6, 8 and 9, two query batches, and
// the block-level sequential L2P of Fig. 10. The port-level interfaces to
// DRAM, flash controllers and firmware are this design's own.
module megis_top
  import megis_pkg::*;
#(
  parameter int unsigned N_CH            = 8,
  parameter int unsigned LEVELS          = 2,
  parameter int unsigned PAGES_PER_BLOCK = 768,
  parameter int unsigned ADDR_W          = 32,
  parameter int unsigned PBA_W           = 32,
  parameter int unsigned NPG_W           = 32,
  parameter int unsigned LEN_W           = 32,
  parameter int unsigned PAGE_W          = $clog2(PAGES_PER_BLOCK)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host commands
  input  logic                          cmd_valid,
  input  cmd_e                          cmd_op,
  input  logic [1:0]                    cmd_arg,
  input  logic [63:0]                   cmd_addr,
  input  logic [63:0]                   cmd_size,
  output logic                          mg_mode,
  output logic [3:0]                    step_active,
  output logic [63:0]                   host_buf_base,
  output logic [63:0]                   host_buf_size,
  // operations
  input  logic                          op_start,
  input  mode_e                         op_mode,
  input  logic [N_CH-1:0]               op_mask,
  input  logic [N_CH-1:0][PLEN_W-1:0]   op_plen,
  input  logic [ID_W-1:0]               op_offset,
  input  logic [PAGE_W-1:0]             op_start_page,
  input  logic [N_CH-1:0][NPG_W-1:0]    op_npages,
  input  logic [ADDR_W-1:0]             op_store_base,
  output logic                          op_ready,
  output logic                          op_done,
  output mode_e                         mode,
  // query batches
  input  logic                          bpush_valid,
  output logic                          bpush_ready,
  input  logic [LEN_W-1:0]              bpush_len,
  input  logic                          bpush_use_base,
  input  logic [ADDR_W-1:0]             bpush_base,
  input  logic                          bpush_last,
  output logic [ADDR_W-1:0]             bfill_base,
  // internal DRAM reads of query / intersecting k-mers
  output logic [N_CH-1:0]               q_rd_en,
  output logic [N_CH-1:0][ADDR_W-1:0]   q_rd_addr,
  input  logic [N_CH-1:0]               q_rd_valid,
  input  logic [N_CH-1:0][KMER_W-1:0]   q_rd_data,
  // L2P block sequence
  output logic [N_CH-1:0][NPG_W-1:0]    bt_idx,
  input  logic [N_CH-1:0][PBA_W-1:0]    bt_pba,
  input  logic [N_CH-1:0]               bt_valid,
  // page reads
  output logic [N_CH-1:0]               pr_valid,
  output logic [N_CH-1:0][PBA_W-1:0]    pr_pba,
  output logic [N_CH-1:0][PAGE_W-1:0]   pr_page,
  output logic [N_CH-1:0]               pr_last,
  input  logic [N_CH-1:0]               pr_ready,
  // flash records
  input  logic [N_CH-1:0]               fl_valid,
  input  logic [N_CH-1:0][KMER_W-1:0]   fl_key,
  input  logic [N_CH-1:0][ID_W-1:0]     fl_aux,
  input  logic [N_CH-1:0]               fl_last,
  output logic [N_CH-1:0]               fl_ready,
  // results
  output logic [N_CH-1:0]               o_valid,
  output logic [N_CH-1:0][KMER_W-1:0]   o_key,
  output logic [N_CH-1:0][ID_W-1:0]     o_aux,
  output logic [N_CH-1:0][ADDR_W-1:0]   o_addr,
  output logic [N_CH-1:0][31:0]         st_count,
  input  logic [N_CH-1:0]               o_ready
);

  localparam logic [PLEN_W-1:0] FULL = PLEN_W'(KMER_BASES);

  logic                         clear, sketch_fire, merge_sel, bm_empty, bm_retire;
  logic [N_CH-1:0]              cur_mask, bm_rd_valid, bm_rd_last;
  logic [N_CH-1:0]              q_valid, lt, eq, gt, curr_valid, next_valid, aux_empty;
  logic [N_CH-1:0]              reg_in_ready, reg_in_valid, new_prefix;
  logic [N_CH-1:0]              pop_q, pop_db, seq_busy;
  rec_t [N_CH-1:0]              reg_in, curr, nxt;
  logic [N_CH-1:0][KMER_W-1:0]  pfx_key, cmp_a;
  logic [N_CH-1:0][PLEN_W-1:0]  plen_q, cmp_plen;
  logic [N_CH-1:0][31:0]        pfx_index;
  logic [ID_W-1:0]              offset_q;
  logic [N_CH-1:0]              cu_out_valid, out_ready, st_full, st_hold;
  logic [N_CH-1:0][ADDR_W-1:0]  st_addr;
  logic                         batches_ended;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plen_q        <= '0;
      offset_q      <= '0;
      batches_ended <= 1'b0;
    end else if (clear) begin
      plen_q        <= op_plen;
      offset_q      <= op_offset;
      batches_ended <= 1'b0;
    end else if (bpush_valid && bpush_ready && bpush_last) begin
      batches_ended <= 1'b1;
    end
  end

  // intersecting k-mers go to per-channel DRAM regions; a full region holds
  // its channel's next result
  assign st_hold   = (mode == MODE_INTERSECT) ? st_full : '0;
  assign out_ready = o_ready & ~st_hold;
  assign o_valid   = cu_out_valid & ~st_hold;

  intersection_store #(.N_CH(N_CH), .ADDR_W(ADDR_W)) u_store (
    .clk, .rst_n,
    .clear(clear && op_mode == MODE_INTERSECT), .base(op_store_base),
    .fire((mode == MODE_INTERSECT) ? (o_valid & o_ready) : '0),
    .wr_addr(st_addr), .count(st_count), .full(st_full)
  );
  assign o_addr = (mode == MODE_INTERSECT) ? st_addr : '0;

  control_unit #(.N_CH(N_CH), .LEVELS(LEVELS)) u_cu (
    .clk, .rst_n,
    .cmd_valid, .cmd_op, .cmd_arg, .cmd_addr, .cmd_size,
    .mg_mode, .step_active, .host_buf_base, .host_buf_size,
    .op_start, .op_mode, .op_mask, .op_ready, .op_done, .mode, .cur_mask, .clear,
    .bm_empty, .batches_ended,
    .q_valid, .lt, .eq, .gt, .curr_valid, .curr_aux_empty(aux_empty),
    .reg_in_ready, .fl_valid, .fl_last, .new_prefix, .out_ready,
    .fl_ready, .reg_in_valid, .sketch_fire, .pop_q, .pop_db,
    .out_valid(cu_out_valid), .merge_sel
  );

  query_batch_manager #(.N_CH(N_CH), .ADDR_W(ADDR_W), .LEN_W(LEN_W)) u_bm (
    .clk, .rst_n,
    .push_valid(bpush_valid), .push_ready(bpush_ready), .push_len(bpush_len),
    .push_use_base(bpush_use_base), .push_base(bpush_base), .push_mask(cur_mask),
    .fill_base(bfill_base),
    .rd_valid(bm_rd_valid), .rd_addr(q_rd_addr), .rd_last(bm_rd_last),
    .pop(pop_q), .retire(bm_retire), .empty(bm_empty)
  );

  assign q_rd_en = bm_rd_valid;
  assign q_valid = bm_rd_valid & q_rd_valid;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    l2p_sequencer #(.PAGES_PER_BLOCK(PAGES_PER_BLOCK), .PBA_W(PBA_W), .NPG_W(NPG_W)) u_seq (
      .clk, .rst_n, .start(clear), .start_page(op_start_page), .n_pages(op_npages[c]),
      .bt_idx(bt_idx[c]), .bt_pba(bt_pba[c]), .bt_valid(bt_valid[c]),
      .req_valid(pr_valid[c]), .req_pba(pr_pba[c]), .req_page(pr_page[c]),
      .req_last(pr_last[c]), .req_ready(pr_ready[c]), .busy(seq_busy[c])
    );

    // level c of taxID retrieval watches the sketches entering channel 0
    index_generator #(.W(KMER_W), .G(IDXG_W)) u_idx (
      .clk, .rst_n, .clear, .plen(plen_q[c]), .in_key(fl_key[0]), .in_fire(sketch_fire),
      .new_prefix(new_prefix[c]), .prefix_key(pfx_key[c]), .index(pfx_index[c])
    );

    always_comb begin
      if (mode == MODE_TAXID && c >= 1 && c < LEVELS)
        reg_in[c] = '{key: pfx_key[c], aux: fl_aux[c], last: fl_last[0]};
      else
        reg_in[c] = '{key: fl_key[c], aux: fl_aux[c], last: fl_last[c]};
    end

    kmer_register_pair #(.W(REC_W)) u_regs (
      .clk, .rst_n, .clear,
      .in_valid(reg_in_valid[c]), .in_data(reg_in[c]), .in_ready(reg_in_ready[c]),
      .curr_valid(curr_valid[c]), .curr_data(curr[c]),
      .next_valid(next_valid[c]), .next_data(nxt[c]), .pop(pop_db[c])
    );

    assign aux_empty[c] = (curr[c].aux == NO_TAXID);

    always_comb begin
      unique case (mode)
        MODE_TAXID: begin
          cmp_a[c]    = q_rd_data[0];
          cmp_plen[c] = plen_q[c];
        end
        MODE_MERGE: begin
          cmp_a[c]    = (c == 0 && N_CH > 1) ? curr[(c + 1) % N_CH].key : q_rd_data[c];
          cmp_plen[c] = FULL;
        end
        default: begin
          cmp_a[c]    = q_rd_data[c];
          cmp_plen[c] = FULL;
        end
      endcase
    end

    kmer_intersect #(.W(KMER_W)) u_isect (
      .a(cmp_a[c]), .b(curr[c].key), .plen(cmp_plen[c]),
      .lt(lt[c]), .eq(eq[c]), .gt(gt[c])
    );

    always_comb begin
      unique case (mode)
        MODE_TAXID: begin
          o_key[c] = curr[c].key;
          o_aux[c] = curr[c].aux;
        end
        MODE_MERGE: begin
          if (c == 0 && merge_sel && N_CH > 1) begin
            o_key[c] = curr[(c + 1) % N_CH].key;
            o_aux[c] = curr[(c + 1) % N_CH].aux + offset_q;
          end else begin
            o_key[c] = curr[c].key;
            o_aux[c] = curr[c].aux;
          end
        end
        default: begin
          o_key[c] = q_rd_data[c];
          o_aux[c] = '0;
        end
      endcase
    end
  end

endmodule
