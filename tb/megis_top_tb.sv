// megis_top_tb: end-to-end run of the MegIS accelerator at its default size
// (8 channels, two taxID levels, 768-page blocks).
//
// Around the accelerator the test keeps behavioural models of what is
// outside it: the internal DRAM (query batches, the intersecting-k-mer
// region, the L2P block sequences), one flash channel per channel (serving
// the requested pages, R records each, with random stalls) and result
// sinks with random back-pressure. It then runs a whole analysis:
//   1. MegIS_Init and the host's k-mer extraction / sorting steps;
//   2. intersection finding of three query batches against a k-mer
//      database whose pages are dealt round-robin over the 8 channels,
//      starting two pages before a block boundary so every channel crosses
//      one; the intersecting k-mers stored in each channel's DRAM region
//      are checked too;
//   3. taxID retrieval from KSS tables (kmax sketches on channel 0, taxIDs
//      of their 4-base prefixes on channel 1), over three batches, including
//      the paper's Fig. 7/8 example;
//   4. merging two reference indexes with the location offset of Fig. 9,
//      including its example;
//   5. one more intersection with nothing stalling, whose cycle count must
//      stay within queries + database records per channel (one step per
//      channel per cycle) plus a few cycles of start-up;
//   6. exit to baseline-SSD mode.
// Every output stream is compared with a reference computed here from the
// same data by plain set/merge logic. Each mechanism the design has
// (batch stall, flash/DRAM stall, output back-pressure, block crossing,
// database end before the queries, new-prefix loads, empty taxIDs, merge
// ties) is counted and must occur.
module megis_top_tb;
  import megis_pkg::*;
  localparam int N = 8, L = 2, PPB = 768, R = 16;
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

  megis_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
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

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // -------------------------------------------------------------- test
  logic [KMER_W-1:0] db[$], qs[$], batch[$], exp_k[$], sk[$], inter[$];
  logic [ID_W-1:0]   sk_id[$], p_id[$], exp_a[$];
  logic [KMER_W-1:0] p_key[$];

  initial begin
    for (int c = 0; c < N; c++) begin
      pages_pend[c] = 0; rec_ptr[c] = 0; pages_req[c] = 0;
      for (int k = 0; k < 4; k++) bt[c].push_back(32 + 100 * c + 24 * k);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. metagenomic mode and host steps
    command(CMD_INIT, 0);
    chk(mg_mode && op_ready, "MegIS_Init");
    command(CMD_STEP, STEP_KMER_EXTRACTION);
    command(CMD_STEP, STEP_KMER_EXTRACTION);
    command(CMD_STEP, STEP_SORTING);
    chk(step_active == 4'b0010, "host sorting step active");

    // ---- 2. intersection finding
    clear_models();
    start_pg = PPB - 2;
    for (int i = 0; i < N * R * 3 - 5; i++) db.push_back(rnd_kmer() >> 2);
    db.sort();
    foreach (db[i]) begin
      rec_t r;
      r.key = db[i]; r.aux = '0; r.last = 1'b0;
      recs[(i / R) % N].push_back(r);
    end
    for (int i = 0; i < db.size(); i += 3) qs.push_back(db[i]);
    for (int i = 0; i < 150; i++) qs.push_back(rnd_kmer() >> 2);
    for (int i = 0; i < 6; i++) qs.push_back({2'b11, rnd_kmer()} );  // above every database k-mer
    qs.sort();
    start_op(MODE_INTERSECT, '1);
    for (int b = 0; b < 3; b++) begin
      batch.delete();
      for (int i = b * qs.size() / 3; i < (b + 1) * qs.size() / 3; i++) batch.push_back(qs[i]);
      push_batch(batch, 0, 0, 0);
    end
    command(CMD_STEP, STEP_SORTING);   // host has no more buckets
    wait_done(20000, "intersection finding");
    for (int c = 0; c < N; c++) begin
      exp_k.delete();
      foreach (qs[i]) begin
        bit hit;
        hit = 0;
        foreach (recs[c][j]) if (recs[c][j].key == qs[i]) hit = 1;
        if (hit) exp_k.push_back(qs[i]);
        if (qs[i] > recs[c][recs[c].size() - 1].key) n_db_end_drop++;
      end
      n_match += exp_k.size();
      chk(got_key[c].size() == exp_k.size(),
          $sformatf("ch%0d intersection size %0d vs %0d", c, got_key[c].size(), exp_k.size()));
      foreach (exp_k[i]) if (i < got_key[c].size()) chk(got_key[c][i] == exp_k[i], "intersecting k-mer");
      // stored in channel c's DRAM region, one after another
      chk(st_count[c] == exp_k.size(), "stored count");
      foreach (exp_k[i]) begin
        int unsigned a;
        a = op_store_base + c * (1 << 24) + 16 * i;
        chk(dram.exists(a) && dram[a] == exp_k[i], $sformatf("ch%0d stored k-mer %0d", c, i));
      end
      chk(rec_ptr[c] <= recs[c].size(), "no read past the database");
    end

    // ---- 3. taxID retrieval (KSS)
    clear_models();
    start_pg = 5;
    // the Fig. 7/8 example: 5-mers AAAAA(1) AAAAC(6) AATCC(2), 4-mer taxIDs - and 3
    sk.push_back(str2kmer("AAAAA")); sk_id.push_back(1);
    sk.push_back(str2kmer("AAAAC")); sk_id.push_back(6);
    sk.push_back(str2kmer("AATCC")); sk_id.push_back(2);
    for (int i = 0; i < 70; i++) begin
      logic [KMER_W-1:0] k;
      k = rnd_kmer();
      k[KMER_W-1 -: 12] = {4'b0100, 4'($urandom_range(15, 0)), 4'($urandom_range(3, 0))};
      sk.push_back(k);
      sk_id.push_back(($urandom_range(4, 0) == 0) ? NO_TAXID : ID_W'($urandom_range(9999, 10)));
    end
    // keep the sketches sorted (the example stays first: it starts with AA)
    for (int i = 3; i < sk.size(); i++)
      for (int j = i + 1; j < sk.size(); j++)
        if (sk[j] < sk[i]) begin
          logic [KMER_W-1:0] t; logic [ID_W-1:0] u;
          t = sk[i]; sk[i] = sk[j]; sk[j] = t; u = sk_id[i]; sk_id[i] = sk_id[j]; sk_id[j] = u;
        end
    foreach (sk[i]) begin
      rec_t r; r.key = sk[i]; r.aux = sk_id[i]; r.last = 0; recs[0].push_back(r);
    end
    // level 1: 4-base prefixes for the example, one taxID per distinct prefix
    foreach (sk[i]) begin
      if (i == 0 || pfx(sk[i], 4) != pfx(sk[i-1], 4)) begin
        rec_t r;
        p_key.push_back(pfx(sk[i], 4));
        if (p_key.size() == 1) p_id.push_back(NO_TAXID);       // AAAA: "-"
        else if (p_key.size() == 2) p_id.push_back(3);         // AATC: 3
        else p_id.push_back(($urandom_range(3, 0) == 0) ? NO_TAXID : ID_W'($urandom_range(99, 20)));
        r.key = '0; r.aux = p_id[p_id.size() - 1]; r.last = 0; recs[1].push_back(r);
      end
    end
    n_new_prefix = p_key.size();
    // the intersecting k-mers: some sketches, some sharing only a prefix
    inter.push_back(str2kmer("AAAAC"));
    inter.push_back(str2kmer("AATCG"));
    for (int i = 3; i < sk.size(); i += 2) inter.push_back(sk[i]);
    for (int i = 0; i < 40; i++) begin
      logic [KMER_W-1:0] k;
      k = rnd_kmer();
      k[KMER_W-1 -: 4] = 4'b0100;
      inter.push_back(k);
    end
    inter.sort();
    op_plen = '0; op_plen[0] = PLEN_W'(KMER_BASES); op_plen[1] = 4;
    start_op(MODE_TAXID, '0);
    // the intersecting k-mers, sorted in one DRAM area, read as three batches
    for (int b = 0; b < 3; b++) begin
      int lo, hi;
      lo = b * inter.size() / 3;
      hi = (b + 1) * inter.size() / 3;
      batch.delete();
      for (int i = lo; i < hi; i++) batch.push_back(inter[i]);
      push_batch(batch, 1, 32'h0100_0000 + 16 * lo, b == 2);
    end
    wait_done(20000, "taxID retrieval");
    for (int l = 0; l < L; l++) begin
      exp_a.delete();
      foreach (inter[i]) begin
        if (l == 0) begin
          foreach (sk[j]) if (sk[j] == inter[i] && sk_id[j] != NO_TAXID) exp_a.push_back(sk_id[j]);
        end else begin
          foreach (p_key[j])
            if (p_key[j] == pfx(inter[i], 4)) begin
              if (p_id[j] != NO_TAXID) begin exp_a.push_back(p_id[j]); n_lvl1_match++; end
              else n_empty_taxid++;
            end
        end
      end
      if (got_aux[l].size() != exp_a.size()) begin
        foreach (got_aux[l][i]) $display("got %0d", got_aux[l][i]);
        foreach (exp_a[i]) $display("exp %0d", exp_a[i]);
      end
      chk(got_aux[l].size() == exp_a.size(),
          $sformatf("level %0d taxIDs %0d vs %0d", l, got_aux[l].size(), exp_a.size()));
      foreach (exp_a[i]) if (i < got_aux[l].size()) chk(got_aux[l][i] == exp_a[i], $sformatf("level %0d taxID", l));
    end
    // Fig. 8: AAAAC -> 6 at kmax; AATCG shares the 4-mer AATC -> 3
    chk(got_aux[0].size() > 0 && got_aux[0][0] == 6, "Fig. 8 5-mer AAAAC -> 6");
    chk(got_aux[1].size() > 0 && got_aux[1][0] == 3, "Fig. 8 4-mer AATC -> 3");

    // ---- 4. unified reference index
    clear_models();
    start_pg = 0;
    begin
      rec_t ra[$], rb[$], mg[$];
      rec_t r;
      r.last = 0;
      r.key = str2kmer("ATT"); r.aux = 14; ra.push_back(r);
      r.key = str2kmer("CCA"); r.aux = 9;  ra.push_back(r);
      r.key = str2kmer("GCT"); r.aux = 5;  ra.push_back(r);
      r.key = str2kmer("AAG"); r.aux = 2;  rb.push_back(r);
      r.key = str2kmer("CCA"); r.aux = 21; rb.push_back(r);
      r.key = str2kmer("TGC"); r.aux = 4;  rb.push_back(r);
      for (int i = 0; i < 60; i++) begin
        r.key = str2kmer("TT") | (rnd_kmer() >> 8); r.aux = $urandom_range(999, 0);
        if (i % 3 == 0) begin ra.push_back(r); r.aux = $urandom_range(999, 0); rb.push_back(r); end
        else if (i % 3 == 1) ra.push_back(r);
        else rb.push_back(r);
      end
      ra.sort() with (item.key);
      rb.sort() with (item.key);
      foreach (ra[i]) recs[0].push_back(ra[i]);
      foreach (rb[i]) recs[1].push_back(rb[i]);
      // reference merge: A before B on equal k-mers, B shifted by the offset
      begin
        int i = 0, j = 0;
        while (i < ra.size() || j < rb.size()) begin
          if (j >= rb.size() || (i < ra.size() && ra[i].key <= rb[j].key)) begin
            if (j < rb.size() && ra[i].key == rb[j].key) n_merge_tie++;
            mg.push_back(ra[i]); i++;
          end else begin
            r = rb[j]; r.aux = r.aux + 1000; mg.push_back(r); j++;
          end
        end
      end
      op_offset = 1000;
      start_op(MODE_MERGE, '0);
      wait_done(20000, "index merge");
      chk(got_key[0].size() == mg.size(), $sformatf("unified index size %0d vs %0d", got_key[0].size(), mg.size()));
      foreach (mg[i]) if (i < got_key[0].size())
        chk(got_key[0][i] == mg[i].key && got_aux[0][i] == mg[i].aux, "unified index entry");
      // Fig. 9: AAG 1002, ATT 14, CCA 9, CCA 1021, GCT 5, TGC 1004
      chk(got_aux[0].size() >= 6 && got_aux[0][0] == 1002 && got_aux[0][1] == 14 &&
          got_aux[0][2] == 9 && got_aux[0][3] == 1021 && got_aux[0][4] == 5 &&
          got_aux[0][5] == 1004, "Fig. 9 unified index");
    end

    // ---- 5. rate: with nothing stalling, every channel advances its query or
    // its database (or both) in every cycle
    clear_models();
    stall_en = 0;
    start_pg = 100;
    db.delete(); qs.delete();
    for (int i = 0; i < N * R * 6; i++) db.push_back(rnd_kmer());
    db.sort();
    foreach (db[i]) begin
      rec_t r;
      r.key = db[i]; r.aux = '0; r.last = 1'b0;
      recs[(i / R) % N].push_back(r);
    end
    for (int i = 0; i < db.size(); i += 2) qs.push_back(db[i]);
    for (int i = 0; i < 100; i++) qs.push_back(rnd_kmer());
    qs.sort();
    command(CMD_STEP, STEP_SORTING);
    begin
      int t0, cycles, bound;
      bound = 0;
      for (int c = 0; c < N; c++)
        if (qs.size() + recs[c].size() > bound) bound = qs.size() + recs[c].size();
      start_op(MODE_INTERSECT, '1);
      t0 = $time / 10;
      push_batch(qs, 0, 0, 0);
      command(CMD_STEP, STEP_SORTING);
      wait_done(20000, "intersection at full rate");
      cycles = $time / 10 - t0;
      $display("rate: %0d cycles for %0d queries against up to %0d records per channel",
               cycles, qs.size(), bound - qs.size());
      chk(cycles <= bound + 16, $sformatf("one step per channel per cycle (%0d > %0d)", cycles, bound + 16));
      for (int c = 0; c < N; c++) begin
        int hits;
        hits = 0;
        foreach (recs[c][j]) foreach (qs[i]) if (qs[i] == recs[c][j].key) hits++;
        chk(got_key[c].size() == hits, "full-rate intersection size");
      end
    end
    stall_en = 1;

    // ---- 6. back to a baseline SSD
    command(CMD_EXIT, 0);
    chk(!mg_mode, "exit metagenomic mode");

    $display("mechanisms: batch_stall=%0d flash_stall=%0d dram_stall=%0d out_backpressure=%0d",
             n_batch_stall, n_flash_stall, n_dram_stall, n_out_bp);
    $display("            block_cross=%0d db_end_drop=%0d intersect_match=%0d new_prefix=%0d",
             n_block_cross, n_db_end_drop, n_match, n_new_prefix);
    $display("            level1_match=%0d empty_taxid=%0d merge_tie=%0d",
             n_lvl1_match, n_empty_taxid, n_merge_tie);
    chk(n_batch_stall > 0, "host batch transfer stalled on two full slots");
    chk(n_flash_stall > 0, "flash stream back-pressured by the k-mer registers");
    chk(n_dram_stall > 0, "DRAM read stall");
    chk(n_out_bp > 0, "output back-pressure");
    chk(n_block_cross >= N, "every channel crossed a block boundary");
    chk(n_db_end_drop > 0, "queries past the end of a channel's database");
    chk(n_match > 0 && n_lvl1_match > 0, "matches at both levels");
    chk(n_new_prefix > 1, "new prefixes loaded");
    chk(n_empty_taxid > 0, "empty taxIDs skipped");
    chk(n_merge_tie > 0, "common k-mers in the merge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
