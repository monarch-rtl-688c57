// tb_port_selector: checks the diagonal set decoding k = (j - i) mod 8 and the
// RowIn/ColumnIn toggle of the port selector.
module tb_port_selector;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic activate; logic [2:0] set; logic colin;
  logic [7:0][7:0] en, row_port, col_port;
  port_selector dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    activate = 0; set = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int m = 0; m < 3; m++) begin
      chk(colin == m[0], "mode toggles");
      for (int k = 0; k < 8; k++) begin
        set = 3'(k); #1;
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
          automatic bit e = ((j - i + 8) % 8) == k;
          chk(en[i][j] == e && row_port[i][j] == (e && !m[0]) && col_port[i][j] == (e && m[0]),
              $sformatf("set %0d array %0d,%0d", k, i, j));
        end
      end
      activate = 1; @(posedge clk); #1; activate = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
