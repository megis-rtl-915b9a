// index_generator_tb: streams sorted k-mers that share prefixes into the
// Index Generator and checks new_prefix, prefix_key and index against a
// reference that remembers the last prefix. Starts with the 5-mer sketches
// of the paper's Fig. 7c/8 (AAAAA, AAAAC, AATCC with 4-mer prefixes: new,
// same, new).
module index_generator_tb;
  localparam int W = 120, G = 64;
  localparam int PW = $clog2(W / 2 + 1);
  logic clk = 0, rst_n = 0, clear = 0, in_fire = 0, new_prefix;
  logic [PW-1:0] plen = 4;
  logic [W-1:0] in_key = '0, prefix_key;
  logic [31:0] index;
  int checks = 0, failures = 0;

  index_generator #(.W(W), .G(G)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic logic [W-1:0] pfx(input logic [W-1:0] k, input int p);
    logic [W-1:0] m;
    m = ~({W{1'b1}} >> (2 * p));
    return k & m;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] fig[3];
  initial begin
    logic [W-1:0] last, k;
    bit have;
    int exp_idx;
    fig[0] = '0; fig[1] = '0; fig[2] = '0;
    fig[0][W-1 -: 10] = 10'b00_00_00_00_00;  // AAAAA
    fig[1][W-1 -: 10] = 10'b00_00_00_00_01;  // AAAAC
    fig[2][W-1 -: 10] = 10'b00_00_11_01_01;  // AATCC
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      in_key = fig[i]; in_fire = 1; #1;
      chk(new_prefix == (i != 1), "Fig. 8 prefix change");
      chk(prefix_key == pfx(fig[i], 4), "Fig. 8 prefix key");
      @(posedge clk); @(negedge clk);
    end
    chk(index == 1, "two distinct 4-mers give index 1");
    // random sorted streams
    for (int run = 0; run < 20; run++) begin
      in_fire = 0; clear = 1; plen = PW'($urandom_range(G / 2, 1));
      @(posedge clk); @(negedge clk);
      clear = 0;
      have = 0; exp_idx = 0;
      k = '0;
      for (int i = 0; i < 200; i++) begin
        // step the k-mer by a random amount at a random position
        k = k + ({{(W-1){1'b0}}, 1'b1} << $urandom_range(W - 1, W - 2 * G / 2 + 8));
        in_key = k;
        in_fire = ($urandom_range(3, 0) != 0);
        #1;
        chk(new_prefix == (!have || pfx(k, plen) != last), "new_prefix");
        chk(prefix_key == pfx(k, plen), "prefix_key");
        chk(index == exp_idx, "index");
        if (in_fire) begin
          if (have && pfx(k, plen) != last) exp_idx++;
          have = 1; last = pfx(k, plen);
        end
        @(posedge clk); @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
