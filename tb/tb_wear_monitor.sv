// tb_wear_monitor: drives writes into the X-Wear monitor and checks the
// superset count (first write per superset only), the WR condition (writes
// 512x the superset count), the dirty limit, and the offset steps on rotation.
module tb_wear_monitor;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr, dirty, rotate_req, rotate_done, swt_q_w, swt_q_d, wr_flag, wc_flag, dc_flag;
  logic [4:0] ss_id, swt_q_id;
  logic [7:0] bank_off, ss_off; logic [2:0] set_off, vault_off;
  wear_monitor #(.NUM_SSID(32), .NUM_RAM_BANKS(30), .NUM_SS(256), .DC_LIMIT(4)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  task automatic w(int id, bit d); wr = 1; ss_id = 5'(id); dirty = d; @(posedge clk); #1; wr = 0; dirty = 0; endtask
  initial begin
    wr = 0; dirty = 0; ss_id = 0; rotate_done = 0; swt_q_id = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // two supersets: WR needs msb(writes) >= msb(2)+9 = 11 -> 1024 writes
    for (int k = 0; k < 1023; k++) w(k % 2, 0);
    chk(!rotate_req, "no rotate below 1024 writes for 2 supersets");
    swt_q_id = 1; #1; chk(swt_q_w && !swt_q_d, "SWT W set, D clear");
    w(0, 0);
    chk(wr_flag && rotate_req, "WR after 1024 writes");
    rotate_done = 1; @(posedge clk); #1; rotate_done = 0;
    chk(!rotate_req && bank_off == 1 && set_off == 3 && ss_off == 7 && vault_off == 0, "offsets after rotate 1");
    swt_q_id = 1; #1; chk(!swt_q_w, "SWT cleared");
    // dirty limit 4: dirtying writes to 4 distinct supersets
    for (int k = 0; k < 4; k++) begin w(8 + k, 1); w(8 + k, 1); end
    chk(dc_flag && rotate_req, "DC after 4 dirty supersets");
    for (int r = 2; r <= 8; r++) begin rotate_done = 1; @(posedge clk); #1; rotate_done = 0; end
    chk(bank_off == 8 && set_off == 3'(24) && ss_off == 56 && vault_off == 5, "offsets after 8 rotates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
