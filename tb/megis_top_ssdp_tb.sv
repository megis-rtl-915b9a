// megis_top_ssdp_tb: the channel counts the MegIS paper evaluates, run
// through the whole accelerator. One instance has 16 channels, as in the
// paper's performance-optimized SSD, and is run with 4, 8 and 16 channels
// enabled. A 32-channel instance is run with 8, 16 and 32 enabled. Both
// perform intersection finding under random stalls and once at full rate,
// checked against reference intersections (see megis_sweep_bench). The
// default 8-channel instance is covered by the end-to-end testbench.
module megis_top_ssdp_tb;
  logic done16, done32;
  int   checks16, failures16, checks32, failures32;

  megis_sweep_bench #(.N(16)) ch16 (.done(done16), .checks(checks16), .failures(failures16));
  megis_sweep_bench #(.N(32)) ch32 (.done(done32), .checks(checks32), .failures(failures32));

  int checks, failures;

  initial begin
    int n;
    n = 0;
    do begin #10; n++; end while (!(done16 && done32) && n < 400000);
    checks   = checks16 + checks32;
    failures = failures16 + failures32;
    if (n >= 400000) begin
      failures++;
      $display("watchdog expired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
