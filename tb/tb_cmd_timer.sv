// tb_cmd_timer: issues each command type to a random bank and counts the
// cycles until the next command of each class is allowed, against the
// Table 3 values (t_RP, t_RCD, t_RAS, t_CCD, t_RTP, t_CWD+t_BURST, t_WR).
// Also checks that other banks only wait t_RRD.
module tb_cmd_timer;
  import monarch_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue, buf_only, ok;
  cmd_e issue_cmd, q_cmd;
  logic [BANK_W-1:0] issue_bank, q_bank;
  cmd_timer #(.NUM_BANKS(32)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  // issue c to bank b, then count cycles until q (cmd qc, bank qb) is ok
  task automatic measure(cmd_e c, bit bo, cmd_e qc, int same, int exp, string s);
    int n = 0;
    automatic logic [BANK_W-1:0] b = BANK_W'($urandom % 32);
    while (!ok) @(posedge clk);
    issue = 1; issue_cmd = c; issue_bank = b; buf_only = bo;
    q_cmd = qc; q_bank = same ? b : b + 1'b1;
    @(posedge clk); #1; issue = 0; n = 1;
    while (!ok) begin @(posedge clk); #1; n++; end
    chk(n == exp, $sformatf("%s: %0d cycles, expected %0d", s, n, exp));
    repeat (T_WRITE + 20) @(posedge clk);
    #1;
  endtask
  initial begin
    issue = 0; buf_only = 0; issue_cmd = CMD_NOP; q_cmd = CMD_READ; issue_bank = 0; q_bank = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    repeat (3) begin
      measure(CMD_PREPARE,  0, CMD_ACTIVATE, 1, T_RP,  "tRP");
      measure(CMD_ACTIVATE, 0, CMD_READ,     1, T_RCD, "tRCD");
      measure(CMD_ACTIVATE, 0, CMD_PREPARE,  1, T_RAS, "tRAS");
      measure(CMD_READ,     0, CMD_READ,     1, T_CCD_R, "tCCD");
      measure(CMD_READ,     0, CMD_PREPARE,  1, T_RTP, "tRTP");
      measure(CMD_WRITE,    1, CMD_WRITE,    1, T_CWD + T_BL, "buffer write");
      measure(CMD_WRITE,    0, CMD_READ,     1, T_CWD + T_BL + T_WRITE, "array write");
      measure(CMD_WRITE,    0, CMD_READ,     0, T_RRD, "tRRD other bank");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
