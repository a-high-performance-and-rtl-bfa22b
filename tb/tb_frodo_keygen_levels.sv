// tb_frodo_keygen_levels: the KeyGen workload at FrodoKEM-976 and -1344.
//
// Two default-size processors (frodo_keygen_run, one per level) run a
// complete key generation side by side: SHAKE256 for seedA, sampling and pkh,
// SHAKE128 for the rows of A, n = 976 or 1344 with D = 16. Each checks seedA,
// S^T, every entry of B and pkh against the behavioural models, and reports
// the clocks its KeyGen program took. The level-1 case (n = 640) is covered
// by tb_frodo_top. As a performance check, each run must finish within the
// cycle count reported for the overlapped schedule at that level (371.4 kCC
// for 976, 656.6 kCC for 1344), which a schedule without overlap cannot reach.
// A watchdog ends the run after 3,000,000 clocks.
module tb_frodo_keygen_levels;
  import frodo_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic start = 1'b0;

  logic d976, d1344;
  int   c976, f976, k976, c1344, f1344, k1344;

  frodo_keygen_run #(.LV(LVL_976))  u976  (.clk, .rst_n, .start, .done(d976),
                                            .checks(c976), .failures(f976), .clocks(k976));
  frodo_keygen_run #(.LV(LVL_1344)) u1344 (.clk, .rst_n, .start, .done(d1344),
                                            .checks(c1344), .failures(f1344), .clocks(k1344));

  int checks, failures;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    start = 1'b1;
    wait (d976 && d1344);
    checks   = c976 + c1344 + 2;
    failures = f976 + f1344;
    if (k976 > 371400) begin
      failures++;
      $display("FAIL: KeyGen-976 took %0d clocks", k976);
    end
    if (k1344 > 656600) begin
      failures++;
      $display("FAIL: KeyGen-1344 took %0d clocks", k1344);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c976 + c1344 + 1, f976 + f1344 + 1);
    $finish;
  end
endmodule
