// tb_monarch_top: end-to-end test of the Monarch memory with one vault in
// each mode (vault 0 flat-RAM, vault 1 flat-CAM, vault 2 cache), reduced
// array sizes and a short write time so that the t_MWW window, the write
// limit and the wear-leveling rotation are reached within the run.
// Every response is compared with a reference model kept in the testbench,
// and every mechanism (prepare, activate, search, match-register reuse,
// key/mask transfer, hit, miss, install, skip, forward, t_MWW block,
// rotation) must occur at least once.
module tb_monarch_top;
  import monarch_pkg::*;

  localparam int NV = 3;
  localparam int TWR_TB = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  vault_mode_e [NV-1:0] mode;
  logic [NV-1:0] req_valid, req_ready, resp_valid;
  mreq_t  [NV-1:0] req;
  mresp_t [NV-1:0] resp;
  logic [NV-1:0] mem_valid, mem_ready, mem_we, mem_rvalid;
  logic [NV-1:0][PA_W-1:0] mem_addr;
  logic [NV-1:0][BLOCK_W-1:0] mem_wdata, mem_rdata;
  ctrl_events_t [NV-1:0] ev;

  monarch_top #(.NUM_VAULTS(NV), .NUM_BANKS(3), .NUM_SS(1), .MWW_M(1),
                .T_MWW_CYCLES(64'd30000), .WCNT_W(4), .TWR(TWR_TB)) dut (.*);

  for (genvar v = 0; v < NV; v++) begin : g_mem
    main_mem_model #(.LAT(10)) u_mem (
      .clk, .valid(mem_valid[v]), .ready(mem_ready[v]), .we(mem_we[v]), .addr(mem_addr[v]),
      .wdata(mem_wdata[v]), .rvalid(mem_rvalid[v]), .rdata(mem_rdata[v]));
  end

  int checks = 0, failures = 0;
  int n_prep, n_act, n_srch, n_reuse, n_km, n_hit, n_miss, n_inst, n_skip, n_fwd, n_mww, n_rot;

  always @(posedge clk) begin
    for (int v = 0; v < NV; v++) begin
      n_prep += ev[v].prepare;  n_act  += ev[v].activate; n_srch += ev[v].search;
      n_reuse += ev[v].match_reuse; n_km += ev[v].keymask_xfer;
      n_hit  += ev[v].hit;  n_miss += ev[v].miss; n_inst += ev[v].install;
      n_skip += ev[v].skip; n_fwd  += ev[v].forward; n_mww += ev[v].mww_block;
      n_rot  += ev[v].rotate;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic xact(input int v, input req_op_e op, input logic [PA_W-1:0] a,
                      input logic [BLOCK_W-1:0] d, input bit dirty, input bit rd,
                      output mresp_t rs);
    req[v] = '{op: op, addr: a, wdata: d, dirty: dirty, rd: rd};
    req_valid[v] = 1'b1;
    do @(posedge clk); while (!req_ready[v]);
    #0 req_valid[v] = 1'b0;
    do @(posedge clk); while (!resp_valid[v]);
    rs = resp[v];
  endtask

  function automatic logic [BLOCK_W-1:0] rnd_blk();
    logic [BLOCK_W-1:0] b;
    for (int k = 0; k < 16; k++) b[k*32 +: 32] = $urandom;
    return b;
  endfunction

  // flat address: [11:6] row/column, [14:12] set, [22:15] superset, [28:23] bank
  function automatic logic [PA_W-1:0] faddr(int bank, int set, int idx);
    return PA_W'((bank << 23) | (set << 12) | (idx << 6));
  endfunction

  logic [BLOCK_W-1:0] ram_ref [int];
  mresp_t rs;

  initial begin
    mode = '{VM_CACHE, VM_FLAT_CAM, VM_FLAT_RAM};
    req_valid = '0; req = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // ---------------- vault 0: flat-RAM ----------------
    for (int k = 0; k < 12; k++) begin
      automatic int b = k % 3, s = (k * 3) % 8, rw = (k * 7) % 64;
      automatic logic [BLOCK_W-1:0] d = rnd_blk();
      xact(0, OP_WRITE, faddr(b, s, rw), d, 0, 0, rs);
      ram_ref[int'(faddr(b, s, rw))] = d;
    end
    foreach (ram_ref[a]) begin
      xact(0, OP_READ, PA_W'(a), '0, 0, 0, rs);
      check(rs.rdata == ram_ref[a], $sformatf("flat-RAM readback %h", a));
    end
    // t_MWW: 512*M writes fill the window of bank 1's superset, the next waits
    begin
      automatic int t0, t1;
      for (int k = 0; k < 512; k++) xact(0, OP_WRITE, faddr(1, 0, k % 64), {16{32'(k)}}, 0, 0, rs);
      t0 = $time;
      xact(0, OP_WRITE, faddr(1, 0, 5), {16{32'hABCD0123}}, 0, 0, rs);
      t1 = $time;
      check(n_mww > 0, "t_MWW blocked the write over the limit");
      xact(0, OP_READ, faddr(1, 0, 5), '0, 0, 0, rs);
      check(rs.rdata == {16{32'hABCD0123}}, "blocked write completed after the window");
      $display("write over the t_MWW limit took %0d cycles", (t1 - t0) / 2);
    end

    // ---------------- vault 1: flat-CAM ----------------
    begin
      automatic logic [63:0] keys [8];
      automatic logic [BLOCK_W-1:0] kb, mb;
      // column c of set 2 in bank 2 holds key c for c in 0..7, element j = {c, j}
      for (int c = 0; c < 8; c++) begin
        automatic logic [BLOCK_W-1:0] d;
        for (int j = 0; j < 8; j++) d[j*64 +: 64] = {32'hC0DE0000 + 32'(c), 32'(j)};
        xact(1, OP_WRITE, faddr(2, 2, c), d, 0, 0, rs);
      end
      // search element 5 of column 6 only: key word 5 = {C0DE0006, 5}, mask only word 5
      kb = '0; mb = '0;
      kb[5*64 +: 64] = {32'hC0DE0006, 32'd5};
      mb[5*64 +: 64] = '1;
      xact(1, OP_KEY_WR, faddr(2, 2, 0), kb, 0, 0, rs);
      xact(1, OP_MASK_WR, faddr(2, 2, 0), mb, 0, 0, rs);
      xact(1, OP_SEARCH, faddr(2, 2, 0), '0, 0, 0, rs);
      check(rs.match_valid && rs.match_idx == 9'(5*64 + 6), $sformatf("flat-CAM match idx %0d", rs.match_idx));
      check(rs.rdata[5*64 + 6] && !rs.rdata[5*64 + 7], "flat-CAM match vector");
      xact(1, OP_SEARCH, faddr(2, 2, 0), '0, 0, 0, rs);
      check(n_reuse == 1 && rs.match_idx == 9'(5*64 + 6), "match register reused");
      // partial search: mask the upper 32 bits of word 2 only -> columns 0..7 all match C0DE000x? no: key C0DE0003
      kb = '0; mb = '0;
      kb[2*64 +: 64] = {32'hC0DE0003, 32'd0};
      mb[2*64 +: 64] = {32'hFFFFFFFF, 32'd0};
      xact(1, OP_KEY_WR, faddr(2, 2, 0), kb, 0, 0, rs);
      xact(1, OP_MASK_WR, faddr(2, 2, 0), mb, 0, 0, rs);
      xact(1, OP_SEARCH, faddr(2, 2, 0), '0, 0, 0, rs);
      check(rs.match_valid && rs.match_idx == 9'(2*64 + 3), $sformatf("masked search idx %0d", rs.match_idx));
      // a missing key gives NULL
      kb = '0; kb[0 +: 64] = 64'hDEAD_BEEF_DEAD_BEEF;
      mb = '0; mb[0 +: 64] = '1;
      xact(1, OP_KEY_WR, faddr(2, 2, 0), kb, 0, 0, rs);
      xact(1, OP_MASK_WR, faddr(2, 2, 0), mb, 0, 0, rs);
      xact(1, OP_SEARCH, faddr(2, 2, 0), '0, 0, 0, rs);
      check(!rs.match_valid || rs.match_idx >= 9'd8, "missing key not found in written columns");
      // row read of the CAM data: row 0 holds bit 0 of every element
      xact(1, OP_READ, faddr(2, 2, 0), '0, 0, 0, rs);
      for (int j = 0; j < 8; j++)
        for (int c = 0; c < 8; c++)
          check(rs.rdata[j*64 + c] == j[0], "row read of CAM set");
    end

    // ---------------- vault 2: cache ----------------
    begin
      automatic logic [PA_W-1:0] A = 35'h1_2345_6780 & ~35'h3F;
      automatic logic [PA_W-1:0] B = 35'h0_7777_0040;
      automatic logic [BLOCK_W-1:0] d1 = rnd_blk(), d2 = rnd_blk(), d3 = rnd_blk();
      xact(2, OP_READ, A, '0, 0, 0, rs);
      check(!rs.hit && rs.rdata == g_mem[2].u_mem.peek(A), "cold miss served by memory");
      xact(2, OP_EVICT, A, d1, 0, 1, rs);            // clean, read: install
      xact(2, OP_READ, A, '0, 0, 0, rs);
      check(rs.hit && rs.rdata == d1, "hit after install");
      xact(2, OP_EVICT, A, d2, 1, 1, rs);            // dirty, read: update + write-through
      xact(2, OP_READ, A, '0, 0, 0, rs);
      check(rs.hit && rs.rdata == d2, "hit after update");
      check(g_mem[2].u_mem.peek(A) == d2, "dirty block written through");
      xact(2, OP_EVICT, B, d3, 0, 0, rs);            // never read, clean: skipped
      check(n_skip == 1, "D=0,R=0 eviction skipped");
      xact(2, OP_READ, B, '0, 0, 0, rs);
      check(!rs.hit, "skipped block not installed");
      xact(2, OP_EVICT, A, d3, 1, 0, rs);            // dirty, not read: forward, invalidate
      xact(2, OP_READ, A, '0, 0, 0, rs);
      check(!rs.hit && rs.rdata == d3, "forwarded block read from memory");
      // more installs until the write counter saturates and a rotation flushes
      for (int k = 0; k < 6 && n_rot == 0; k++) begin
        automatic logic [PA_W-1:0] a = PA_W'(k + 1) << 17;
        automatic logic [BLOCK_W-1:0] d = rnd_blk();
        xact(2, OP_EVICT, a, d, 0, 1, rs);
        xact(2, OP_READ, a, '0, 0, 0, rs);
        check(rs.rdata == d, "installed block readable");
      end
      xact(2, OP_READ, B, '0, 0, 0, rs);     // lets a pending rotation run first
      check(n_rot >= 1, "rotation happened");
      xact(2, OP_READ, PA_W'(1) << 17, '0, 0, 0, rs);
      check(!rs.hit, "cache flushed by rotation");
    end

    $display("events: prepare=%0d activate=%0d search=%0d reuse=%0d keymask=%0d hit=%0d miss=%0d install=%0d skip=%0d forward=%0d mww_block=%0d rotate=%0d",
             n_prep, n_act, n_srch, n_reuse, n_km, n_hit, n_miss, n_inst, n_skip, n_fwd, n_mww, n_rot);
    check(n_prep > 0, "prepare"); check(n_act > 0, "activate"); check(n_srch > 0, "search");
    check(n_reuse > 0, "match reuse"); check(n_km > 0, "key/mask transfer");
    check(n_hit > 0, "hit"); check(n_miss > 0, "miss"); check(n_inst > 0, "install");
    check(n_skip > 0, "skip"); check(n_fwd > 0, "forward"); check(n_mww > 0, "mww block");
    check(n_rot > 0, "rotate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
