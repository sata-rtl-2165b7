// tb_zero_unit: random sparse masks with forced empty rows and columns; checks
// the non-trivial flags and that writes of trivial indices are dropped only
// when zero-skip is enabled.
module tb_zero_unit;
  import sata_pkg::*;
  localparam int N = 30;
  logic [N-1:0] mask [N];
  logic zero_skip_en, q_push_i, k_push_i, q_push_o, k_push_o;
  idx_t q_idx, k_idx;
  logic [N-1:0] q_nz, k_nz;
  int checks = 0, failures = 0;

  zero_unit #(.N(N)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int t = 0; t < 100; t++) begin
      bit eq [N], ek [N];
      automatic int zr = $urandom_range(0, N - 1), zc = $urandom_range(0, N - 1);
      for (int q = 0; q < N; q++) begin
        mask[q] = N'({$urandom, $urandom}) & N'({$urandom, $urandom}) & N'({$urandom, $urandom});
        mask[q][zc] = 1'b0;
      end
      mask[zr] = '0;
      for (int i = 0; i < N; i++) begin eq[i] = 0; ek[i] = 0; end
      for (int q = 0; q < N; q++) for (int k = 0; k < N; k++) if (mask[q][k]) begin eq[q] = 1; ek[k] = 1; end
      for (int s = 0; s < 20; s++) begin
        zero_skip_en = $urandom_range(0, 1);
        q_push_i = $urandom_range(0, 1); k_push_i = $urandom_range(0, 1);
        q_idx = (s == 0) ? idx_t'(zr) : idx_t'($urandom_range(0, N - 1));
        k_idx = (s == 0) ? idx_t'(zc) : idx_t'($urandom_range(0, N - 1));
        #1;
        chk(q_push_o == (q_push_i && (!zero_skip_en || eq[q_idx])), "query write filter");
        chk(k_push_o == (k_push_i && (!zero_skip_en || ek[k_idx])), "key write filter");
      end
      for (int i = 0; i < N; i++) chk(q_nz[i] == eq[i] && k_nz[i] == ek[i], $sformatf("nz flags %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
