// kmer_intersect_tb: checks the Intersect comparator against a reference
// that right-shifts both operands to their first plen bases and compares
// them as integers. Covers random k-mers, k-mers that share long prefixes,
// equal k-mers, plen from 0 to beyond the full length.
module kmer_intersect_tb;
  localparam int W = 120;
  localparam int PW = $clog2(W / 2 + 1);

  logic [W-1:0]  a, b;
  logic [PW-1:0] plen;
  logic          lt, eq, gt;
  int checks = 0, failures = 0;

  kmer_intersect #(.W(W)) dut (.a, .b, .plen, .lt, .eq, .gt);

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_one();
    logic [W-1:0] ra, rb;
    int bits;
    bits = (int'(plen) >= W / 2) ? W : 2 * int'(plen);
    ra = (bits == 0) ? '0 : a >> (W - bits);
    rb = (bits == 0) ? '0 : b >> (W - bits);
    #1;
    checks++;
    if (lt !== (ra < rb) || eq !== (ra == rb) || gt !== (ra > rb)) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h plen=%0d lt=%b eq=%b gt=%b", a, b, plen, lt, eq, gt);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fixed cases from the paper's figures: AAAAC vs AATCC as 5-mers
    // (A=00 C=01 G=10 T=11), in the top 10 bits
    a = '0; b = '0;
    a[W-1 -: 10] = 10'b00_00_00_00_01;  // AAAAC
    b[W-1 -: 10] = 10'b00_00_11_01_01;  // AATCC
    plen = 5; check_one();
    plen = 2; check_one();   // AA == AA
    plen = 3; check_one();   // AAA < AAT
    plen = PW'(W / 2); check_one();
    for (int i = 0; i < 3000; i++) begin
      a = rnd();
      case (i % 4)
        0: b = rnd();
        1: b = a;
        2: begin b = a; b[$urandom_range(W-1, 0)] ^= 1'b1; end
        default: begin b = a; b[$urandom_range(7, 0)] ^= 1'b1; end
      endcase
      plen = PW'($urandom_range(W / 2 + 3, 0));
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
