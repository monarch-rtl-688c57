// tb_mww_limiter: with a small window (BLOCKS*M = 8 writes per 200 cycles)
// checks that a superset is blocked after its quota, that other supersets are
// not, and that the block lifts when the window expires.
module tb_mww_limiter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] q_id, wr_id; logic blocked, wr;
  mww_limiter #(.M(2), .BLOCKS(4), .T_MWW_CYCLES(200)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    automatic int id = $urandom % 32;
    automatic int t0;
    wr = 0; q_id = 0; wr_id = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    q_id = 5'(id); t0 = 0;
    for (int k = 0; k < 8; k++) begin
      chk(!blocked, $sformatf("not blocked before write %0d", k));
      wr = 1; wr_id = 5'(id); @(posedge clk); #1; wr = 0; t0++;
    end
    chk(blocked, "blocked after 8 writes");
    q_id = 5'(id + 1); #1; chk(!blocked, "other superset free");
    q_id = 5'(id); #1;
    while (blocked) begin @(posedge clk); #1; t0++; end
    chk(t0 == 200, $sformatf("window reopens after %0d cycles", t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
