// tb_dot_product_engine: popcount(col_i & col_j) against a counting loop, at
// the default tile size and at a non-power-of-two small size.
module tb_dot_product_engine;
  localparam int N = 30;
  localparam int M = 6;
  logic [N-1:0] a, b;
  logic [$clog2(N+1)-1:0] dot;
  logic [M-1:0] c, d;
  logic [$clog2(M+1)-1:0] dot_s;
  int checks = 0, failures = 0;

  dot_product_engine #(.N(N)) dut   (.col_i(a), .col_j(b), .dot(dot));
  dot_product_engine #(.N(M)) dut_s (.col_i(c), .col_j(d), .dot(dot_s));

  initial begin
    for (int t = 0; t < 600; t++) begin
      automatic int e = 0, es = 0;
      a = N'({$urandom, $urandom}); b = N'({$urandom, $urandom});
      if (t == 0) begin a = '1; b = '1; end
      if (t == 1) begin a = '0; end
      c = M'($urandom); d = M'($urandom);
      #1;
      for (int i = 0; i < N; i++) e += a[i] & b[i];
      for (int i = 0; i < M; i++) es += c[i] & d[i];
      checks += 2;
      if (int'(dot) != e)   begin failures++; $display("FAIL: %b & %b -> %0d exp %0d", a, b, dot, e); end
      if (int'(dot_s) != es) begin failures++; $display("FAIL: small %0d exp %0d", dot_s, es); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
