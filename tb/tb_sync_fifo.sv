// tb_sync_fifo: random pushes and pops (never illegal ones) against a queue
// model; checks data order, empty, full and count, and that a full FIFO
// accepts a push together with a pop.
module tb_sync_fifo;
  localparam int W = 10, D = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full; logic [W-1:0] din, dout; logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, n_full = 0, n_both_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      automatic int bias = (t / 500) % 2 ? 80 : 30;
      @(negedge clk);
      chk(empty == (model.size() == 0) && full == (model.size() == D) && int'(count) == model.size(),
          $sformatf("flags at size %0d", model.size()));
      if (model.size() > 0) chk(dout == model[0], "head of queue");
      pop  = !empty && ($urandom_range(1, 100) > bias);
      push = ($urandom_range(1, 100) <= bias) && (!full || pop);
      din  = W'($urandom);
      if (full) n_full++;
      if (full && push && pop) n_both_full++;
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    chk(n_full > 0 && n_both_full > 0, "full and push+pop-when-full reached");
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
