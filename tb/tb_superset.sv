// tb_superset: one superset against a bit-level model of its 8 sets.
// Checks row writes and reads, column writes (whole and masked with the mask
// buffer), key/mask buffer loading through RowIn writes to a CAM bank, the
// 512-bit search result, and that a write keeps the superset busy for the two
// write steps (t_WR = 162 cycles in total).
module tb_superset;
  import monarch_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bank_cam, act, wr, rd, use_mask, busy, colin;
  logic [SET_W-1:0] set; logic [IDX_W-1:0] idx;
  logic [BLOCK_W-1:0] wdata, rdata;
  superset dut (.*);
  logic [BLOCK_W-1:0] m [8][64];   // m[set][row]: 512-bit block of row 'row'
  logic [BLOCK_W-1:0] kb, mb;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask
  function automatic logic [BLOCK_W-1:0] rnd();
    for (int k = 0; k < 16; k++) rnd[k*32 +: 32] = $urandom;
  endfunction
  task automatic do_act(); act = 1; @(posedge clk); #1; act = 0; endtask
  task automatic do_wr(int s, int i, logic [BLOCK_W-1:0] d, bit um, bit timed);
    int n = 0;
    wr = 1; set = 3'(s); idx = 6'(i); wdata = d; use_mask = um;
    @(posedge clk); #1; wr = 0;
    while (busy) begin @(posedge clk); #1; n++; end
    if (timed) chk(n == T_WRITE, $sformatf("write busy %0d cycles", n));
  endtask
  task automatic do_rd(int s, int i, output logic [BLOCK_W-1:0] q);
    rd = 1; set = 3'(s); idx = 6'(i); @(posedge clk); #1; rd = 0; q = rdata;
  endtask
  task automatic col_model(int s, int c, logic [BLOCK_W-1:0] d, bit um);
    for (int j = 0; j < 8; j++) for (int r = 0; r < 64; r++)
      if (!um || mb[j*64 + r]) m[s][r][j*64 + c] = d[j*64 + r];
  endtask
  initial begin
    logic [BLOCK_W-1:0] q, e;
    bank_cam = 0; act = 0; wr = 0; rd = 0; use_mask = 0; set = 0; idx = 0; wdata = 0;
    for (int s = 0; s < 8; s++) for (int r = 0; r < 64; r++) m[s][r] = '0;
    mb = '1; kb = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    // RowIn writes in a RAM bank
    for (int k = 0; k < 6; k++) begin
      automatic int s = $urandom % 8, i = $urandom % 64;
      automatic logic [BLOCK_W-1:0] d = rnd();
      do_wr(s, i, d, 0, k < 2); m[s][i] = d;
    end
    // ColumnIn writes
    do_act(); chk(colin, "ColumnIn after activate");
    for (int k = 0; k < 3; k++) begin
      automatic int s = $urandom % 8, c = $urandom % 64;
      automatic logic [BLOCK_W-1:0] d = rnd();
      do_wr(s, c, d, 0, 0); col_model(s, c, d, 0);
    end
    for (int s = 0; s < 8; s++) for (int r = 0; r < 64; r += 9) begin
      do_rd(s, r, q); chk(q == m[s][r], $sformatf("row read set %0d row %0d", s, r));
    end
    // CAM bank, RowIn: load key (even idx) and mask (odd idx), then search
    bank_cam = 1; do_act(); chk(!colin, "RowIn after second activate");
    for (int t = 0; t < 4; t++) begin
      automatic int s = $urandom % 8;
      automatic int c = $urandom % 64;
      for (int j = 0; j < 8; j++) for (int r = 0; r < 64; r++) kb[j*64 + r] = m[s][r][j*64 + c];
      mb = (t == 0) ? '1 : rnd();
      do_wr(s, 2 * ($urandom % 32), kb, 0, 0);
      do_wr(s, 2 * ($urandom % 32) + 1, mb, 0, 0);
      do_rd(s, 0, q);
      for (int j = 0; j < 8; j++) for (int cc = 0; cc < 64; cc++) begin
        e[j*64 + cc] = 1'b1;
        for (int r = 0; r < 64; r++)
          if (mb[j*64 + r] && m[s][r][j*64 + cc] != kb[j*64 + r]) e[j*64 + cc] = 1'b0;
      end
      chk(q == e, $sformatf("search set %0d", s));
      for (int j = 0; j < 8; j++) chk(q[j*64 + c], "key column matches itself");
    end
    // masked column update in the CAM bank
    do_act();
    begin
      automatic int s = $urandom % 8, c = $urandom % 64;
      automatic logic [BLOCK_W-1:0] d = rnd();
      do_wr(s, c, d, 1, 1); col_model(s, c, d, 1);
    end
    bank_cam = 0;
    for (int s = 0; s < 8; s++) for (int r = 0; r < 64; r += 5) begin
      do_rd(s, r, q); chk(q == m[s][r], $sformatf("row read after masked update %0d %0d", s, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
