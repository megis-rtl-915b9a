// kmer_register_pair_tb: drives random pushes and pops into the Curr/Next
// register pair and compares curr/next/ready every cycle with a reference
// queue model. Also checks that a continuous stream with a pop every cycle
// moves one record per cycle.
// The one-record-per-cycle rate is this design's target (the paper gives
// only the 300 MHz clock); the queue model is the reference.
module kmer_register_pair_tb;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0, in_ready, curr_valid, next_valid, pop = 0;
  logic [W-1:0] in_data = '0, curr_data, next_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  logic [W-1:0] seq = 1;

  kmer_register_pair #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int moved, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // compare with the model
      chk(curr_valid == (q.size() >= 1), "curr_valid");
      chk(next_valid == (q.size() >= 2), "next_valid");
      if (q.size() >= 1) chk(curr_data == q[0], "curr_data");
      if (q.size() >= 2) chk(next_data == q[1], "next_data");
      in_valid = ($urandom_range(3, 0) != 0);
      in_data  = seq;
      pop      = curr_valid && ($urandom_range(2, 0) != 0);
      clear    = (i % 997 == 500);
      #1;
      chk(in_ready == (q.size() < 2 || pop), "in_ready");
      @(posedge clk);
      if (clear) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (in_valid && in_ready) begin q.push_back(seq); seq++; end
      end
    end
    // rate: always valid, always pop -> one record per cycle
    @(negedge clk);
    pop = 0; in_valid = 0; clear = 1;
    @(negedge clk);
    clear = 0;
    moved = 0;
    for (cyc = 0; cyc < 100; cyc++) begin
      in_valid = 1;
      pop = curr_valid;
      @(posedge clk);
      if (pop) moved++;
      @(negedge clk);
    end
    chk(moved >= 99, "one record per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
