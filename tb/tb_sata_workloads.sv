// tb_sata_workloads: runs the scheduler on the shapes of the four evaluated
// workloads, each in its own sata_top instance sized to the workload's tile:
//   TTST           T = 30 tokens,  K = 15, tile 30 (the whole sequence), no zero-skip
//   KVT-DeiT-Tiny  T = 198 tokens, K = 50, tile 22 (0.11 x 198), zero-skip
//   KVT-DeiT-Base  T = 198 tokens, K = 64, tile 22, zero-skip
//   DRSformer      T = 48 tokens,  K = 12, tile 6 (0.125 x 48), zero-skip
// One head of each is cut into tiles and scheduled (1, 81, 81 and 64 tiles).
// Token counts, K, tile fractions and the zero-skip setting are the published
// evaluation settings; the masks themselves are random TopK masks of that shape.
// Every transfer is checked against the reference model (see
// sata_workload_run); the printout gives cycles per tile and the S_h / GLOB
// statistics of the random masks. A watchdog ends the run after 200000 cycles.
module tb_sata_workloads;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  bit d0, d1, d2, d3;
  int c0, c1, c2, c3, f0, f1, f2, f3;

  sata_workload_run #(.N(30), .T(30),  .K(15), .ZSKIP(1'b0), .NAME("TTST"))
    u_ttst (.clk, .rst_n, .done(d0), .checks(c0), .failures(f0));
  sata_workload_run #(.N(22), .T(198), .K(50), .ZSKIP(1'b1), .NAME("KVT-DeiT-Tiny"))
    u_kvt_tiny (.clk, .rst_n, .done(d1), .checks(c1), .failures(f1));
  sata_workload_run #(.N(22), .T(198), .K(64), .ZSKIP(1'b1), .NAME("KVT-DeiT-Base"))
    u_kvt_base (.clk, .rst_n, .done(d2), .checks(c2), .failures(f2));
  sata_workload_run #(.N(6),  .T(48),  .K(12), .ZSKIP(1'b1), .NAME("DRSformer"))
    u_drs (.clk, .rst_n, .done(d3), .checks(c3), .failures(f3));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2 && d3);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog, done %b%b%b%b", d0, d1, d2, d3);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3 + 1);
    $finish;
  end
endmodule
