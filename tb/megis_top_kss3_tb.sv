// megis_top_kss3_tb: taxID retrieval through the whole accelerator with
// three K-mer Sketch Streaming levels (k = 5, 4 and 3), on a 4-channel
// instance.
//
// Round 0 is the example of the MegIS paper's KSS figure: 5-mer sketches
// AAAAA/1, AAAAC/6, AATCC/2, the 4-mer taxID table {-, 3} (for AAAA, AATC) and
// the 3-mer table {8, 5} (for AAA, AAT). The following rounds use random
// sets of 5-mer sketches and queries over the full 4^5 space, so that
// prefixes are shared often at both shorter levels, with random empty
// taxIDs and random start pages. The expected taxIDs of every level are
// computed here by looking each query's prefix up in plain lists. The DRAM,
// flash and result-sink models, all stalling at random, are the same as in
// the full-size end-to-end testbench. Three levels and the 4-channel size
// are a test configuration; the default instance has two levels.
module megis_top_kss3_tb;
  import megis_pkg::*;
  localparam int N = 4, L = 3, PPB = 768, R = 4;
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

  // ----------------------------------------------------------- test
  localparam int PL [L] = '{KMER_BASES, 4, 3};
  logic [KMER_W-1:0] sk[$], inter[$], exp_k[$];
  logic [ID_W-1:0]   sk_id[$], exp_a[$];
  logic [KMER_W-1:0] p_key [L][$];
  logic [ID_W-1:0]   p_id  [L][$];
  int n_lvl_match [L];
  int n_fig_ok = 0;

  function automatic logic [KMER_W-1:0] rnd_5mer();
    logic [KMER_W-1:0] v = '0;
    v[KMER_W-1 -: 10] = 10'($urandom_range(1023, 0));
    return v;
  endfunction

  initial begin
    for (int l = 0; l < L; l++) n_lvl_match[l] = 0;
    for (int c = 0; c < N; c++) begin
      pages_pend[c] = 0; rec_ptr[c] = 0; pages_req[c] = 0;
      for (int k = 0; k < 4; k++) bt[c].push_back(7 + 40 * c + 9 * k);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    command(CMD_INIT, 0);
    for (int round = 0; round < 6; round++) begin
      clear_models();
      sk.delete(); sk_id.delete(); inter.delete();
      for (int l = 0; l < L; l++) begin p_key[l].delete(); p_id[l].delete(); end
      start_pg = (round == 0) ? 0 : $urandom_range(PPB - 1, PPB - 4);
      if (round == 0) begin
        sk.push_back(str2kmer("AAAAA")); sk_id.push_back(1);
        sk.push_back(str2kmer("AAAAC")); sk_id.push_back(6);
        sk.push_back(str2kmer("AATCC")); sk_id.push_back(2);
        inter.push_back(str2kmer("AAAAA")); inter.push_back(str2kmer("AAAAC"));
        inter.push_back(str2kmer("AAAAG")); inter.push_back(str2kmer("AATCC"));
        inter.push_back(str2kmer("AATGG")); inter.push_back(str2kmer("AATTT"));
        inter.push_back(str2kmer("ACGTA"));
      end else begin
        for (int i = 0; i < 40; i++) sk.push_back(rnd_5mer());
        sk.sort();
        sk = sk.unique();
        foreach (sk[i]) sk_id.push_back(($urandom_range(5, 0) == 0) ? NO_TAXID : ID_W'($urandom_range(999, 1)));
        for (int i = 0; i < 60; i++) inter.push_back(rnd_5mer());
        for (int i = 0; i < sk.size(); i += 3) inter.push_back(sk[i]);
        inter.sort();
        inter = inter.unique();
      end
      // the shorter-k tables: one taxID per distinct prefix of the sketches
      for (int l = 1; l < L; l++)
        foreach (sk[i])
          if (i == 0 || pfx(sk[i], PL[l]) != pfx(sk[i-1], PL[l])) begin
            p_key[l].push_back(pfx(sk[i], PL[l]));
            if (round == 0) p_id[l].push_back((l == 1) ? ((p_key[l].size() == 1) ? NO_TAXID : 3)
                                                       : ((p_key[l].size() == 1) ? 8 : 5));
            else p_id[l].push_back(($urandom_range(3, 0) == 0) ? NO_TAXID : ID_W'($urandom_range(99, 1)));
          end
      foreach (sk[i]) begin
        rec_t r; r.key = sk[i]; r.aux = sk_id[i]; r.last = 0; recs[0].push_back(r);
      end
      for (int l = 1; l < L; l++)
        foreach (p_id[l][j]) begin
          rec_t r; r.key = '0; r.aux = p_id[l][j]; r.last = 0; recs[l].push_back(r);
        end
      op_plen = '0;
      for (int l = 0; l < L; l++) op_plen[l] = PLEN_W'(PL[l]);
      start_op(MODE_TAXID, '0);
      push_batch(inter, 1, 32'h0040_0000, 1);
      wait_done(20000, $sformatf("round %0d", round));
      for (int l = 0; l < L; l++) begin
        exp_a.delete();
        foreach (inter[i]) begin
          if (l == 0) begin
            foreach (sk[j]) if (sk[j] == inter[i] && sk_id[j] != NO_TAXID) exp_a.push_back(sk_id[j]);
          end else begin
            foreach (p_key[l][j])
              if (p_key[l][j] == pfx(inter[i], PL[l])) begin
                if (p_id[l][j] != NO_TAXID) exp_a.push_back(p_id[l][j]);
                else n_empty_taxid++;
              end
          end
        end
        n_lvl_match[l] += exp_a.size();
        chk(got_aux[l].size() == exp_a.size(),
            $sformatf("round %0d level %0d: %0d taxIDs, expected %0d", round, l, got_aux[l].size(), exp_a.size()));
        foreach (exp_a[i]) if (i < got_aux[l].size())
          chk(got_aux[l][i] == exp_a[i], $sformatf("round %0d level %0d taxID %0d", round, l, i));
      end
      if (round == 0) begin
        // 5-mers: 1 6 2; 4-mers: AATC -> 3 only (AAAA is empty); 3-mers: AAA x3 -> 8, AAT x3 -> 5
        n_fig_ok = (got_aux[0].size() == 3 && got_aux[0][0] == 1 && got_aux[0][1] == 6 && got_aux[0][2] == 2 &&
                    got_aux[1].size() == 1 && got_aux[1][0] == 3 &&
                    got_aux[2].size() == 6 && got_aux[2][0] == 8 && got_aux[2][3] == 5) ? 1 : 0;
        chk(n_fig_ok == 1, "paper's KSS example, all three levels");
      end
    end
    $display("matches per level: %0d %0d %0d, empty taxIDs %0d, flash stalls %0d, output back-pressure %0d",
             n_lvl_match[0], n_lvl_match[1], n_lvl_match[2], n_empty_taxid, n_flash_stall, n_out_bp);
    for (int l = 0; l < L; l++) chk(n_lvl_match[l] > 0, $sformatf("level %0d matched", l));
    chk(n_empty_taxid > 0, "empty taxIDs skipped");
    chk(n_flash_stall > 0 && n_out_bp > 0, "stalls and back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
