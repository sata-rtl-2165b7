// tb_max_k: random passes of candidates (with many equal values) against a
// model of "largest value, first index on a tie".
module tb_max_k;
  import sata_pkg::*;
  localparam int N = 30;
  localparam int PSUM_W = $clog2(N * N + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, en; idx_t idx; logic [PSUM_W-1:0] val;
  idx_t best_idx; logic [PSUM_W-1:0] best_val; logic best_valid;
  int checks = 0, failures = 0;

  max_k #(.N(N)) dut (.*);

  initial begin
    clr = 0; en = 0; idx = '0; val = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 200; pass++) begin
      automatic int bi = -1, bv = -1;
      automatic int len = $urandom_range(1, N);
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      checks++;
      if (best_valid) begin failures++; $display("FAIL: valid after clear"); end
      for (int i = 0; i < len; i++) begin
        en = ($urandom_range(0, 4) != 0) || (i == 0);
        idx = idx_t'(i);
        val = PSUM_W'($urandom_range(0, (pass % 2) ? 3 : 900));
        if (en && int'(val) > bv) begin bv = int'(val); bi = i; end
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (!best_valid || int'(best_idx) != bi || int'(best_val) != bv) begin
        failures++;
        $display("FAIL: pass %0d best %0d/%0d exp %0d/%0d", pass, best_idx, best_val, bi, bv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
