// megis_sweep_bench: intersection finding on an N-channel instance of the
// accelerator, run with N/4, N/2 and N channels enabled through the channel
// mask. With N = 16 this is the channel count of the MegIS paper's
// performance-optimized SSD and its 4/8/16 sweep; with N = 32 it is the
// 8/16/32 sweep.
//
// For each channel count M, a sorted random k-mer database is dealt page by
// page round-robin over channels 0..M-1 (4 records per page here), and a
// sorted query set (every third database k-mer plus random misses) is sent
// as two batches. Every active channel must return exactly the queries found
// in its own pages, in order, and store them in its DRAM region; channels
// outside the mask must stay idle. The DRAM, flash and result-sink models
// stall at random, as in the 8-channel end-to-end testbench. A final pass
// with all stalls off checks that all N channels still compare one k-mer per
// channel per cycle. The 4-record page is a test size; the channel counts
// are the paper's.
//
// Interface: done rises when the run is over; checks and failures count the
// comparisons made and failed. The enclosing testbench owns the watchdog.
module megis_sweep_bench #(
  parameter int N = 16
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import megis_pkg::*;
  localparam int L = 2, PPB = 768, R = 4;
  localparam int PAGE_W = $clog2(PPB);

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0; cmd_e cmd_op = CMD_INIT; logic [1:0] cmd_arg = '0;
  logic [63:0] cmd_addr = '0, cmd_size = '0;
  logic mg_mode; logic [3:0] step_active; logic [63:0] host_buf_base, host_buf_size;
  logic op_start = 0; mode_e op_mode = MODE_IDLE; logic [N-1:0] op_mask = '0;
  logic [N-1:0][PLEN_W-1:0] op_plen = '0; logic [ID_W-1:0] op_offset = '0;
  logic [PAGE_W-1:0] op_start_page = '0; logic [N-1:0][31:0] op_npages = '0;
  logic op_ready, op_done; mode_e mode;
  logic bpush_valid = 0, bpush_ready, bpush_use_base = 0;
  logic [31:0] bpush_len = '0, bpush_base = '0, bfill_base;
  logic bpush_last = 0;
  logic [31:0] op_store_base = 32'h0200_0000;
  logic [N-1:0][31:0] o_addr, st_count;
  logic [N-1:0] q_rd_en, q_rd_valid;
  logic [N-1:0][31:0] q_rd_addr;
  logic [N-1:0][KMER_W-1:0] q_rd_data;
  logic [N-1:0][31:0] bt_idx, bt_pba;
  logic [N-1:0] bt_valid;
  logic [N-1:0] pr_valid, pr_last, pr_ready;
  logic [N-1:0][31:0] pr_pba;
  logic [N-1:0][PAGE_W-1:0] pr_page;
  logic [N-1:0] fl_valid, fl_last, fl_ready;
  logic [N-1:0][KMER_W-1:0] fl_key;
  logic [N-1:0][ID_W-1:0] fl_aux;
  logic [N-1:0] o_valid, o_ready;
  logic [N-1:0][KMER_W-1:0] o_key;
  logic [N-1:0][ID_W-1:0] o_aux;

  megis_top #(.N_CH(N), .LEVELS(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  // mechanism counters
  int n_batch_stall = 0, n_flash_stall = 0, n_dram_stall = 0, n_out_bp = 0;
  int n_block_cross = 0, n_db_end_drop = 0, n_new_prefix = 0, n_empty_taxid = 0;
  int n_merge_tie = 0, n_match = 0, n_lvl1_match = 0;

  // ------------------------------------------------------------ models
  logic [KMER_W-1:0] dram [int unsigned];
  int unsigned bt [N][$];
  rec_t recs [N][$];
  int   rec_ptr [N];
  int   pages_req [N];
  int   pages_pend [N];
  int   start_pg;
  bit   stall_en = 1;
  // collected outputs
  logic [KMER_W-1:0] got_key [N][$];
  logic [ID_W-1:0]   got_aux [N][$];

  always_comb begin
    for (int c = 0; c < N; c++) begin
      q_rd_data[c] = dram.exists(q_rd_addr[c]) ? dram[q_rd_addr[c]] : '0;
      bt_pba[c]    = (int'(bt_idx[c]) < bt[c].size()) ? bt[c][bt_idx[c]] : 32'hdead;
      fl_key[c]    = (rec_ptr[c] < recs[c].size()) ? recs[c][rec_ptr[c]].key : '0;
      fl_aux[c]    = (rec_ptr[c] < recs[c].size()) ? recs[c][rec_ptr[c]].aux : '0;
      fl_last[c]   = (rec_ptr[c] < recs[c].size()) ? recs[c][rec_ptr[c]].last : 1'b0;
    end
  end

  // random stall pattern, chosen at each negedge
  always @(negedge clk) begin
    for (int c = 0; c < N; c++) begin
      q_rd_valid[c] = !stall_en || ($urandom_range(9, 0) != 0);
      bt_valid[c]   = !stall_en || ($urandom_range(15, 0) != 0);
      pr_ready[c]   = !stall_en || ($urandom_range(3, 0) != 0);
      fl_valid[c]   = (pages_pend[c] > 0) && (rec_ptr[c] < recs[c].size()) &&
                      (!stall_en || ($urandom_range(4, 0) != 0));
      o_ready[c]    = !stall_en || ($urandom_range(5, 0) != 0);
    end
  end

  always @(posedge clk) if (rst_n) begin  // models start after reset
    for (int c = 0; c < N; c++) begin
      if (q_rd_en[c] && !q_rd_valid[c]) n_dram_stall++;
      if (o_valid[c] && !o_ready[c]) n_out_bp++;
      if (fl_valid[c] && !fl_ready[c]) n_flash_stall++;
      if (pr_valid[c] && pr_ready[c]) begin
        int p, b;
        p = start_pg + pages_req[c];
        b = p / PPB;
        chk(int'(pr_pba[c]) == bt[c][b] && int'(pr_page[c]) == p % PPB,
            $sformatf("page address ch%0d page %0d", c, pages_req[c]));
        chk(pr_last[c] == ((pages_req[c] + 1) * R >= recs[c].size()), "last page flag");
        if (b > 0 && p % PPB == 0) n_block_cross++;
        pages_req[c]++;
        pages_pend[c]++;
      end
      if (fl_valid[c] && fl_ready[c]) begin
        rec_ptr[c]++;
        if (rec_ptr[c] % R == 0 || rec_ptr[c] == recs[c].size()) pages_pend[c]--;
      end
      if (o_valid[c] && o_ready[c]) begin
        if (mode == MODE_INTERSECT) dram[o_addr[c]] = o_key[c];
        got_key[c].push_back(o_key[c]);
        got_aux[c].push_back(o_aux[c]);
      end
    end
  end

  // ---------------------------------------------------------- helpers
  function automatic logic [KMER_W-1:0] rnd_kmer();
    logic [KMER_W-1:0] v;
    for (int i = 0; i < KMER_W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [KMER_W-1:0] pfx(input logic [KMER_W-1:0] k, input int p);
    return k & ~({KMER_W{1'b1}} >> (2 * p));
  endfunction

  // bases as 2-bit codes in the top bits (A=0 C=1 G=2 T=3)
  function automatic logic [KMER_W-1:0] str2kmer(input string s);
    logic [KMER_W-1:0] v = '0;
    for (int i = 0; i < s.len(); i++) begin
      logic [1:0] b;
      case (s[i])
        "A": b = 2'd0; "C": b = 2'd1; "G": b = 2'd2; default: b = 2'd3;
      endcase
      v[KMER_W - 1 - 2 * i -: 2] = b;
    end
    return v;
  endfunction

  task automatic command(input cmd_e op, input logic [1:0] arg);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_arg = arg;
    cmd_addr = 64'h0000_0080_0000_0000; cmd_size = 64'd1 << 30;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic clear_models();
    for (int c = 0; c < N; c++) begin
      recs[c].delete(); got_key[c].delete(); got_aux[c].delete();
      rec_ptr[c] = 0; pages_req[c] = 0; pages_pend[c] = 0;
    end
  endtask

  task automatic start_op(input mode_e m, input logic [N-1:0] mask);
    @(negedge clk);
    while (!op_ready) @(negedge clk);
    for (int c = 0; c < N; c++) begin
      op_npages[c] = (recs[c].size() + R - 1) / R;
      if (recs[c].size() > 0) recs[c][recs[c].size() - 1].last = 1'b1;
    end
    op_start_page = PAGE_W'(start_pg);
    op_start = 1; op_mode = m; op_mask = mask;
    @(negedge clk);
    op_start = 0;
  endtask

  task automatic wait_done(input int max_cycles, input string what);
    int n = 0;
    while (!op_done && n < max_cycles) begin @(posedge clk); n++; end
    chk(op_done, {what, " completes"});
    @(negedge clk);
  endtask

  task automatic push_batch(input logic [KMER_W-1:0] ks[$], input bit use_base,
                            input int unsigned base, input bit last);
    int unsigned b;
    @(negedge clk);
    if (!bpush_ready) n_batch_stall++;
    while (!bpush_ready) @(negedge clk);
    b = use_base ? base : bfill_base;
    foreach (ks[i]) dram[b + 16 * i] = ks[i];
    bpush_valid = 1; bpush_len = ks.size(); bpush_use_base = use_base; bpush_base = base;
    bpush_last = last;
    @(negedge clk);
    bpush_valid = 0;
    bpush_last = 0;
  endtask

  // ----------------------------------------------------------- test
  localparam int SWEEP [3] = '{N / 4, N / 2, N};
  logic [KMER_W-1:0] db[$], qs[$], batch[$], exp_k[$];
  int n_silent = 0, n_active = 0;

  // database dealt page-wise over m channels, queries hit every third k-mer
  task automatic make_data(input int m, input int pages_per_ch);
    db.delete(); qs.delete();
    for (int i = 0; i < m * R * pages_per_ch - 3; i++) db.push_back(rnd_kmer() >> 2);
    db.sort();
    foreach (db[i]) begin
      rec_t r;
      r.key = db[i]; r.aux = '0; r.last = 1'b0;
      recs[(i / R) % m].push_back(r);
    end
    for (int i = 0; i < db.size(); i += 3) qs.push_back(db[i]);
    for (int i = 0; i < 40; i++) qs.push_back(rnd_kmer() >> 2);
    qs.sort();
  endtask

  task automatic check_results(input int m, input string what);
    for (int c = 0; c < N; c++) begin
      exp_k.delete();
      if (c < m)
        foreach (qs[i]) begin
          bit hit;
          hit = 0;
          foreach (recs[c][j]) if (recs[c][j].key == qs[i]) hit = 1;
          if (hit) exp_k.push_back(qs[i]);
        end
      n_match += exp_k.size();
      chk(got_key[c].size() == exp_k.size(),
          $sformatf("%s ch%0d intersection size %0d vs %0d", what, c, got_key[c].size(), exp_k.size()));
      foreach (exp_k[i]) if (i < got_key[c].size()) chk(got_key[c][i] == exp_k[i], {what, " intersecting k-mer"});
      chk(st_count[c] == exp_k.size(), {what, " stored count"});
      foreach (exp_k[i]) begin
        int unsigned a;
        a = op_store_base + c * (1 << 24) + 16 * i;
        chk(dram.exists(a) && dram[a] == exp_k[i], $sformatf("%s ch%0d stored k-mer %0d", what, c, i));
      end
      if (c >= m) begin
        chk(pages_req[c] == 0 && got_key[c].size() == 0, {what, " channel outside the mask idle"});
        n_silent++;
      end else if (exp_k.size() > 0) n_active++;
    end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0;
    for (int c = 0; c < N; c++) begin
      pages_pend[c] = 0; rec_ptr[c] = 0; pages_req[c] = 0;
      for (int k = 0; k < 4; k++) bt[c].push_back(11 + 50 * c + 13 * k);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    command(CMD_INIT, 0);

    // channel sweep with random stalls
    foreach (SWEEP[s]) begin
      int m;
      m = SWEEP[s];
      clear_models();
      start_pg = PPB - 1 - s;
      make_data(m, 4);
      command(CMD_STEP, STEP_SORTING);   // host sorting starts
      start_op(MODE_INTERSECT, N'((64'd1 << m) - 1));
      for (int b = 0; b < 2; b++) begin
        batch.delete();
        for (int i = b * qs.size() / 2; i < (b + 1) * qs.size() / 2; i++) batch.push_back(qs[i]);
        push_batch(batch, 0, 0, 0);
      end
      command(CMD_STEP, STEP_SORTING);   // host has no more buckets
      wait_done(40000, $sformatf("%0d channels", m));
      check_results(m, $sformatf("%0d channels:", m));
    end

    // all channels at full rate
    stall_en = 0;
    clear_models();
    start_pg = 3;
    make_data(N, 6);
    begin
      int t0, cycles, bound;
      bound = 0;
      for (int c = 0; c < N; c++)
        if (qs.size() + recs[c].size() > bound) bound = qs.size() + recs[c].size();
      command(CMD_STEP, STEP_SORTING);
      start_op(MODE_INTERSECT, '1);
      t0 = $time / 10;
      push_batch(qs, 0, 0, 0);
      command(CMD_STEP, STEP_SORTING);
      wait_done(20000, $sformatf("%0d channels at full rate", N));
      cycles = $time / 10 - t0;
      $display("rate: %0d cycles for %0d queries against up to %0d records per channel",
               cycles, qs.size(), bound - qs.size());
      chk(cycles <= bound + 16, $sformatf("one step per channel per cycle (%0d > %0d)", cycles, bound + 16));
      check_results(N, "full rate:");
    end
    stall_en = 1;
    command(CMD_EXIT, 0);

    $display("%0d channels: matches=%0d active_channels=%0d masked_channels=%0d flash_stall=%0d dram_stall=%0d out_backpressure=%0d block_cross=%0d", N,
             n_match, n_active, n_silent, n_flash_stall, n_dram_stall, n_out_bp, n_block_cross);
    chk(n_match > 0 && n_active >= N / 4 + N / 2 + N + N, "every active channel matched");
    chk(n_silent == (N - N / 4) + (N - N / 2), "masked channels checked");
    chk(n_flash_stall > 0 && n_dram_stall > 0 && n_out_bp > 0, "stalls and back-pressure");
    chk(n_block_cross >= N, "block boundaries crossed");
    done = 1;
  end
endmodule
