// l2p_sequencer_tb: walks databases laid out like Fig. 10 (channel 0 blocks
// 32 -> 56 -> ..., starting at page 0) and, with a short block of 4 pages,
// walks that cross several block boundaries from a non-zero start page. The
// expected (block, page) of every request and the final-page flag are
// computed independently; the test also checks one request per cycle and
// that a stalled request holds its address.
// Block numbers 32 and 56 are the ones printed in Fig. 10 of the MegIS
// paper; the 4-page block is only a test size (the default is 768).
module l2p_sequencer_tb;
  localparam int PPB = 4;
  localparam int PW = $clog2(PPB);
  logic clk = 0, rst_n = 0, start = 0, bt_valid = 1, req_valid, req_last, req_ready = 1, busy;
  logic [PW-1:0] start_page = '0, req_page;
  logic [31:0] n_pages = '0, bt_idx, bt_pba, req_pba;
  int checks = 0, failures = 0;
  int unsigned blocks[8] = '{32, 56, 80, 104, 128, 152, 176, 200};

  l2p_sequencer #(.PAGES_PER_BLOCK(PPB)) dut (.*);
  always #5 clk = ~clk;
  assign bt_pba = blocks[bt_idx[2:0]];

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

  task automatic walk(input int sp, input int n, input bit stall);
    int got, cycles, b, p;
    @(negedge clk);
    start = 1; start_page = PW'(sp); n_pages = n;
    @(negedge clk);
    start = 0;
    got = 0; cycles = 0; b = 0; p = sp;
    while (got < n && cycles < 200) begin
      req_ready = stall ? ($urandom_range(1, 0) == 1) : 1'b1;
      bt_valid  = stall ? ($urandom_range(3, 0) != 0) : 1'b1;
      #1;
      if (!stall) chk(req_valid, "one request per cycle");
      if (req_valid) begin
        chk(req_pba == blocks[b], "block");
        chk(int'(req_page) == p, "page");
        chk(req_last == (got == n - 1), "last");
      end
      @(posedge clk);
      if (req_valid && req_ready) begin
        got++;
        p++;
        if (p == PPB) begin p = 0; b++; end
      end
      @(negedge clk);
      cycles++;
    end
    chk(got == n, "all pages requested");
    chk(!busy && !req_valid, "idle after walk");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    walk(0, 6, 0);   // Fig. 10: page 0 of block 32, then block 56
    walk(3, 9, 0);   // start near the end of a block
    walk(1, 1, 0);
    for (int i = 0; i < 10; i++) walk($urandom_range(PPB - 1, 0), $urandom_range(20, 1), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
