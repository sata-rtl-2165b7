// tb_qk_trace_regs: writes random rows, then reads random column pairs and the
// whole array back and compares them with a copy of the mask.
module tb_qk_trace_regs;
  import sata_pkg::*;
  localparam int N = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; idx_t wr_row; logic [N-1:0] wr_data;
  idx_t col_a_sel, col_b_sel; logic [N-1:0] col_a, col_b; logic [N-1:0] mask_o [N];
  logic [N-1:0] model [N];
  int checks = 0, failures = 0;

  qk_trace_regs #(.N(N)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    wr_en = 0; wr_row = '0; wr_data = '0; col_a_sel = '0; col_b_sel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int q = 0; q < N; q++) chk(mask_o[q] == '0, "reset clears");
    for (int round = 0; round < 3; round++) begin
      for (int q = 0; q < N; q++) begin
        wr_en = 1; wr_row = idx_t'(q); wr_data = N'({$urandom, $urandom}); model[q] = wr_data;
        @(posedge clk); #1;
      end
      wr_en = 0;
      for (int t = 0; t < 60; t++) begin
        col_a_sel = idx_t'($urandom_range(0, N - 1)); col_b_sel = idx_t'($urandom_range(0, N - 1));
        #1;
        for (int q = 0; q < N; q++) begin
          chk(col_a[q] == model[q][col_a_sel] && col_b[q] == model[q][col_b_sel],
              $sformatf("column %0d/%0d row %0d", col_a_sel, col_b_sel, q));
        end
      end
      for (int q = 0; q < N; q++) chk(mask_o[q] == model[q], $sformatf("row %0d", q));
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
