// tb_priority_encoder: random and corner request vectors against a bit-scan model.
module tb_priority_encoder;
  import sata_pkg::*;
  localparam int W = 30;
  logic [W-1:0] req;
  logic         valid;
  idx_t         idx;
  int checks = 0, failures = 0;

  priority_encoder #(.W(W)) dut (.req, .valid, .idx);

  task automatic one(logic [W-1:0] r);
    automatic int exp_idx = -1;
    req = r;
    #1;
    for (int i = 0; i < W; i++) if (r[i] && exp_idx < 0) exp_idx = i;
    checks++;
    if (valid != (exp_idx >= 0) || (exp_idx >= 0 && int'(idx) != exp_idx)) begin
      failures++;
      $display("FAIL: req=%b valid=%b idx=%0d exp=%0d", r, valid, idx, exp_idx);
    end
  endtask

  initial begin
    one('0);
    for (int i = 0; i < W; i++) one(W'(1) << i);
    one('1);
    for (int t = 0; t < 500; t++) begin
      automatic logic [W-1:0] r = W'({$urandom, $urandom});
      if (t % 3 == 0) r = r & (W'({$urandom, $urandom}) << (t % W));
      one(r);
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
