// tb_classifier: first the six-token example of the paper's Fig. 2 (keys
// sorted 0,3,4 | 2,5,1, S_h = 3): queries 0 and 4 must be HEAD, 3 and 5 GLOB,
// 1 and 2 TAIL, and the 2/2 HEAD/TAIL tie must give a HEAD head; with
// theta = 1 the two GLOB queries must ask for a concede. Then random masks,
// ranks and S_h at the default size against a direct model of the rules.
module tb_classifier;
  import sata_pkg::*;
  localparam int N = 30;
  localparam int M = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  // small instance (Fig. 2)
  logic s_clr, s_en; logic [M-1:0] s_row; idx_t s_rank [M]; idx_t s_sh; logic [IDX_W:0] s_theta;
  qtype_e s_qt; logic [IDX_W:0] s_nh, s_nt, s_ng; logic s_conc; htype_e s_ht;
  classifier #(.N(M)) dut_s (.clk, .rst_n, .clr(s_clr), .en(s_en), .row(s_row), .rank(s_rank),
    .s_h(s_sh), .theta(s_theta), .qtype(s_qt), .n_head(s_nh), .n_tail(s_nt), .n_glob(s_ng),
    .concede(s_conc), .head_type(s_ht));

  // full-size instance
  logic clr, en; logic [N-1:0] row; idx_t rank [N]; idx_t s_h; logic [IDX_W:0] theta;
  qtype_e qt; logic [IDX_W:0] nh, nt, ng; logic conc; htype_e ht;
  classifier #(.N(N)) dut (.clk, .rst_n, .clr, .en, .row, .rank, .s_h, .theta, .qtype(qt),
    .n_head(nh), .n_tail(nt), .n_glob(ng), .concede(conc), .head_type(ht));

  // Fig. 2(a) pre-sort mask: row q lists the keys of query q
  logic [M-1:0] fig [M];
  int fig_order [M] = '{0, 3, 4, 2, 5, 1};
  qtype_e fig_exp [M] = '{QT_HEAD, QT_TAIL, QT_TAIL, QT_GLOB, QT_HEAD, QT_GLOB};

  initial begin
    fig[0] = 6'b011001; fig[1] = 6'b100110; fig[2] = 6'b100110;
    fig[3] = 6'b010011; fig[4] = 6'b011001; fig[5] = 6'b010101;
    for (int s = 0; s < M; s++) s_rank[fig_order[s]] = idx_t'(s);
    s_sh = idx_t'(3); s_theta = (IDX_W+1)'(3); s_clr = 0; s_en = 0; s_row = '0;
    clr = 0; en = 0; row = '0; s_h = '0; theta = '0;
    for (int k = 0; k < N; k++) rank[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); s_clr = 1; @(negedge clk); s_clr = 0;
    for (int q = 0; q < M; q++) begin
      s_row = fig[q]; s_en = 1; #1;
      chk(s_qt == fig_exp[q], $sformatf("Fig.2 query %0d tag %s", q, s_qt.name()));
      @(negedge clk);
    end
    s_en = 0; #1;
    chk(s_nh == 2 && s_nt == 2 && s_ng == 2, "Fig.2 counts 2/2/2");
    chk(!s_conc && s_ht == HT_HEAD, "Fig.2 tie gives HEAD head");
    s_theta = (IDX_W+1)'(1); #1;
    chk(s_conc, "two GLOB queries exceed theta = 1");
    s_sh = '0; #1;
    chk(s_ht == HT_GLOB, "S_h = 0 gives GLOB head");

    // random full-size passes
    for (int t = 0; t < 40; t++) begin
      int perm [N];
      automatic int eh = 0, et = 0, eg = 0;
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      for (int k = 0; k < N; k++) rank[k] = idx_t'(perm[k]);
      s_h = idx_t'($urandom_range(0, N / 2));
      theta = (IDX_W+1)'($urandom_range(0, N));
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int q = 0; q < N; q++) begin
        automatic bit hf = 0, hl = 0;
        qtype_e e;
        row = N'({$urandom, $urandom}) & N'({$urandom, $urandom}) & N'({$urandom, $urandom});
        for (int k = 0; k < N; k++) if (row[k]) begin
          if (perm[k] < int'(s_h)) hf = 1;
          if (perm[k] >= N - int'(s_h)) hl = 1;
        end
        e = !hl ? QT_HEAD : !hf ? QT_TAIL : QT_GLOB;
        if (e == QT_HEAD) eh++; else if (e == QT_TAIL) et++; else eg++;
        en = 1; #1;
        chk(qt == e, $sformatf("random query tag %s exp %s", qt.name(), e.name()));
        @(negedge clk);
      end
      en = 0; #1;
      chk(int'(nh) == eh && int'(nt) == et && int'(ng) == eg, "random counts");
      chk(conc == (eg > int'(theta)), "random concede");
      chk(ht == ((s_h == 0) ? HT_GLOB : (eh >= et) ? HT_HEAD : HT_TAIL), "random head type");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
