// intersection_store_tb: three channels with 4-k-mer regions (64 bytes)
// store intersecting k-mers at random times. A per-channel model tracks how
// many each channel stored; every cycle the test checks the write address
// (base + channel * region + 16 bytes per stored k-mer), the count and the
// full flag, which must rise exactly when a region holds 4 k-mers. A channel
// only stores while its region is not full, as the accelerator's
// back-pressure guarantees. Several operations with different bases check
// that the start of an operation resets every channel. The small region is
// a test size; the default region is 16 MiB.
module intersection_store_tb;
  localparam int N = 3, REGION = 64, CAP = REGION / 16;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [31:0] base = '0;
  logic [N-1:0] fire = '0;
  logic [N-1:0][31:0] wr_addr, count;
  logic [N-1:0] full;

  intersection_store #(.N_CH(N), .ADDR_W(32), .REGION_BYTES(32'(REGION))) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_full = 0;
  int cnt [N];
  int unsigned base_m;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 5; op++) begin
      @(negedge clk);
      base = 32'h0100_0000 + 32'($urandom_range(255, 0)) * 32'h1000;
      clear = 1;
      @(negedge clk);
      clear = 0;
      base_m = base;
      base = 32'hdead_0000;  // only the value at the start counts
      for (int c = 0; c < N; c++) cnt[c] = 0;
      for (int t = 0; t < 40; t++) begin
        #1;
        for (int c = 0; c < N; c++) begin
          chk(wr_addr[c] == base_m + c * REGION + 16 * cnt[c], $sformatf("ch%0d address", c));
          chk(count[c] == cnt[c], $sformatf("ch%0d count", c));
          chk(full[c] == (cnt[c] == CAP), $sformatf("ch%0d full", c));
          if (full[c]) n_full++;
          fire[c] = !full[c] && ($urandom_range(3, 0) == 0);
        end
        @(posedge clk);
        for (int c = 0; c < N; c++) if (fire[c]) cnt[c]++;
        @(negedge clk);
        fire = '0;
      end
    end
    chk(n_full > 0, "regions filled up");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
