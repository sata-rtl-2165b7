// tb_psum_regs: random accumulations into random registers against an array
// model, including clears; checks the combinational sum and the stored value.
module tb_psum_regs;
  import sata_pkg::*;
  localparam int N = 30;
  localparam int DOT_W = $clog2(N + 1), PSUM_W = $clog2(N * N + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, acc_en; idx_t acc_idx; logic [DOT_W-1:0] acc_val; logic [PSUM_W-1:0] sum_o;
  int model [N];
  int checks = 0, failures = 0;

  psum_regs #(.N(N)) dut (.*);

  initial begin
    clr = 0; acc_en = 0; acc_idx = '0; acc_val = '0;
    for (int i = 0; i < N; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      clr = (t % 500 == 499);
      acc_en = ($urandom_range(0, 3) != 0);
      acc_idx = idx_t'($urandom_range(0, N - 1));
      acc_val = DOT_W'($urandom_range(0, N));
      #1;
      checks++;
      if (int'(sum_o) != model[acc_idx] + int'(acc_val)) begin
        failures++;
        $display("FAIL: psum[%0d]=%0d + %0d, exp %0d", acc_idx, sum_o, acc_val, model[acc_idx] + acc_val);
      end
      @(posedge clk);
      if (clr) for (int i = 0; i < N; i++) model[i] = 0;
      else if (acc_en) model[acc_idx] = (model[acc_idx] + int'(acc_val)) % (1 << PSUM_W);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
