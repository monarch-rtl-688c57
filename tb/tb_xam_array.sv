// tb_xam_array: writes rows and columns of one XAM subarray with the two-step
// sequence, reads rows back and runs masked searches, all compared against a
// bit matrix kept by the testbench.
module tb_xam_array;
  logic clk = 0;
  always #1 clk = ~clk;
  logic row_wr, col_wr, wr_step, use_wmask, ref_search;
  logic [5:0] row_idx, col_idx;
  logic [63:0] row_data, col_data, wmask, key, mask, sense;
  xam_array dut (.*);
  logic [63:0] ref_m [64];   // ref_m[row][col]
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  task automatic wrow(int r, logic [63:0] d);
    row_idx = 6'(r); row_data = d; col_wr = 0;
    for (int s = 0; s < 2; s++) begin wr_step = s[0]; row_wr = 1; @(posedge clk); #0; end
    row_wr = 0; ref_m[r] = d;
  endtask
  task automatic wcol(int c, logic [63:0] d, bit um, logic [63:0] m);
    col_idx = 6'(c); col_data = d; use_wmask = um; wmask = m; row_wr = 0;
    for (int s = 0; s < 2; s++) begin wr_step = s[0]; col_wr = 1; @(posedge clk); #0; end
    col_wr = 0;
    for (int r = 0; r < 64; r++) if (!um || m[r]) ref_m[r][c] = d[r];
  endtask
  initial begin
    row_wr = 0; col_wr = 0; wr_step = 0; use_wmask = 0; ref_search = 0; key = 0; mask = 0;
    row_idx = 0; col_idx = 0; row_data = 0; col_data = 0; wmask = 0;
    for (int r = 0; r < 64; r++) wrow(r, {$urandom, $urandom});
    // step 0 alone writes only the zeros
    row_idx = 3; row_data = 64'h0; wr_step = 0; row_wr = 1; @(posedge clk); #0; row_wr = 0;
    ref_search = 0; #1; chk(sense == 64'h0, "step 0 writes zeros");
    wrow(3, 64'hFFFF_0000_1234_5678);
    for (int k = 0; k < 10; k++) wcol($urandom % 64, {$urandom, $urandom}, k[0], {$urandom, $urandom});
    for (int r = 0; r < 64; r++) begin row_idx = 6'(r); #1; chk(sense == ref_m[r], $sformatf("row read %0d", r)); end
    // searches: key = column 17, full mask, and byte-masked
    ref_search = 1;
    for (int t = 0; t < 3; t++) begin
      automatic logic [63:0] exp;
      for (int r = 0; r < 64; r++) key[r] = ref_m[r][17];
      mask = (t == 0) ? '1 : (t == 1) ? 64'h0000_0000_0000_FF00 : 64'h0;
      #1;
      for (int c = 0; c < 64; c++) begin
        exp[c] = 1;
        for (int r = 0; r < 64; r++) if (mask[r] && ref_m[r][c] != key[r]) exp[c] = 0;
      end
      chk(sense == exp && sense[17], $sformatf("search %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
