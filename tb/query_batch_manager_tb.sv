// query_batch_manager_tb: four channels read a sequence of query batches at
// random, independent paces. A reference model per channel tracks which
// batch and which k-mer each channel should be on; the test checks every
// read address (slot base + 16 bytes per k-mer), the last flag, the order of
// batch release, that a third batch waits while two are held (push_ready
// low) and that channels outside a batch's mask skip it.
// Two slots follow the paper; the 16-byte k-mer slot, the per-channel
// release rule and the mask are this design's choices, checked here. It
// also checks that a batch is released only after every channel read it.
module query_batch_manager_tb;
  localparam int N = 4, AW = 32, LW = 32;
  logic clk = 0, rst_n = 0;
  logic push_valid = 0, push_ready, push_use_base = 0, retire, empty;
  logic [LW-1:0] push_len = '0;
  logic [AW-1:0] push_base = '0, fill_base;
  logic [N-1:0]  push_mask = '1, rd_valid, rd_last, pop = '0;
  logic [N-1:0][AW-1:0] rd_addr;
  int checks = 0, failures = 0, stalls = 0, retires = 0, skipped = 0;

  query_batch_manager #(.N_CH(N), .ADDR_W(AW), .LEN_W(LW)) dut (.*);
  always #5 clk = ~clk;

  // reference: list of pushed batches
  int unsigned b_base[$], b_len[$];
  logic [N-1:0] b_mask[$];
  int ch_b[N], ch_i[N];
  int next_retire = 0;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // skip batches a channel is not part of
  function automatic void skip(int c);
    while (ch_b[c] < b_len.size() && !b_mask[ch_b[c]][c]) begin ch_b[c]++; end
  endfunction

  int to_push = 12;
  initial begin
    for (int c = 0; c < N; c++) begin ch_b[c] = 0; ch_i[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (retires < to_push) begin
      @(negedge clk);
      // push side
      if (b_len.size() < to_push) begin
        push_valid = 1;
        push_len   = LW'($urandom_range(9, 1));
        push_use_base = (b_len.size() == 5);
        push_base  = 32'h4000_0000;
        push_mask  = (b_len.size() == 7) ? 4'b0101 : 4'b1111;
      end else push_valid = 0;
      // channel side
      for (int c = 0; c < N; c++) begin
        skip(c);
        pop[c] = rd_valid[c] && ($urandom_range(2, 0) != 0);
      end
      #1;
      for (int c = 0; c < N; c++) begin
        bit exp_v;
        exp_v = (ch_b[c] < b_len.size()) && (ch_b[c] >= next_retire) ;
        chk(rd_valid[c] == exp_v, $sformatf("rd_valid ch%0d", c));
        if (rd_valid[c] && exp_v) begin
          chk(rd_addr[c] == b_base[ch_b[c]] + 16 * ch_i[c], $sformatf("rd_addr ch%0d", c));
          chk(rd_last[c] == (ch_i[c] == b_len[ch_b[c]] - 1), "rd_last");
        end
      end
      if (push_valid) begin
        chk(push_ready == ((b_len.size() - next_retire) < 2), "push_ready");
        if (!push_ready) stalls++;
      end
      @(posedge clk);
      if (retire) begin
        chk(next_retire < b_len.size(), "retire order");
        for (int c = 0; c < N; c++)
          chk(ch_b[c] > next_retire, $sformatf("retire only after ch%0d finished the batch", c));
        next_retire++; retires++;
      end
      if (push_valid && push_ready) begin
        b_base.push_back(push_use_base ? push_base : fill_base);
        b_len.push_back(push_len);
        b_mask.push_back(push_mask);
        if (push_mask != '1) skipped++;
      end
      for (int c = 0; c < N; c++)
        if (pop[c]) begin
          if (ch_i[c] == b_len[ch_b[c]] - 1) begin ch_i[c] = 0; ch_b[c]++; end
          else ch_i[c]++;
        end
    end
    @(negedge clk);
    chk(empty, "empty at end");
    chk(stalls > 0, "host push stalled on two full slots");
    chk(skipped > 0, "masked batch used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
