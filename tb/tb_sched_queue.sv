// tb_sched_queue: random pushes and pops against a queue model; checks order,
// full/empty flags and that nothing is lost.
module tb_sched_queue;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_pop; logic [7:0] in_data, out_data;
  sched_queue #(.T(logic [7:0]), .DEPTH(4)) dut (.*);
  logic [7:0] model [$];
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    in_valid = 0; out_pop = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int k = 0; k < 2000; k++) begin
      automatic bit push;
      in_valid = $urandom % 2; in_data = 8'($urandom);
      #1;
      chk(in_ready == (model.size() < 4), "in_ready");
      chk(out_valid == (model.size() > 0), "out_valid");
      out_pop = out_valid && ($urandom % 2);
      if (out_pop) chk(out_data == model[0], "order");
      push = in_valid && in_ready;
      @(posedge clk); #1;
      if (out_pop) void'(model.pop_front());
      if (push) model.push_back(in_data);
      in_valid = 0; out_pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
