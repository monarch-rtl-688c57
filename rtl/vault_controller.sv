// vault_controller: the Monarch controller of one vault (processor side).
//
// Requests (mreq_t) enter the scheduling queue and are served one at a time.
// For each request the controller works out the target bank, superset, set
// and row/column, brings the bank to the right sensing mode (prepare toggles
// RAM <-> CAM) and the superset to the right port (activate toggles RowIn <->
// ColumnIn), tracking one mode bit per bank and one port bit per superset,
// and then issues the read or write, each command only when cmd_timer allows
// it. Every request gets exactly one response.
//
// Vault modes (fixed at reset through 'mode'):
//  * flat-RAM: OP_READ/OP_WRITE of a 64 B block, row access in RowIn RAM
//    mode. Flat address: [11:6] row, [14:12] set, [22:15] superset,
//    [28:23] bank (reduced modulo the configured counts).
//  * flat-CAM: OP_WRITE writes a block column-wise (ColumnIn, CAM bank),
//    [11:6] being the column; OP_KEY_WR / OP_MASK_WR load the vault's global
//    key / mask registers; OP_SEARCH (a read of the match pointer) sends the
//    key and mask to the superset if it does not hold the latest ones (RowIn
//    CAM writes with even/odd row), searches the set (ColumnIn, CAM) and
//    returns the match vector, the lowest matching column and a valid flag;
//    a repeated search of the same set with unchanged key/mask and no write
//    in between is answered from the match register. OP_READ reads a row
//    with the bank in RAM mode.
//  * cache: OP_READ looks the tag up (key = {valid=1, tag} in half 'key' of
//    every column, mask = valid+tag bits of that half), reads the data block
//    on a hit and otherwise reads main memory without allocating. OP_EVICT
//    applies the D/R rules: D=0,R=0 is dropped; D=1,R=0 goes to memory (and
//    invalidates a stale copy); R=1 updates a hit or installs the block, the
//    victim being the first invalid column at or after the vault's free
//    running 9-bit replacement counter (else the counter's column). Dirty
//    blocks are also written through to memory, so XAM blocks are never the
//    only copy. Writes to a superset that t_MWW blocks go to memory instead
//    (flat modes: the write waits). Every XAM write is reported to the wear
//    monitor; on its rotate request the controller invalidates every tag set
//    of the written CAM supersets (a row write of zeros to the valid-bit row)
//    and then lets the monitor step the address offsets.
// Which rules come from the paper and which are this design's is listed in
// the accompanying documentation; main points of departure: one request in
// flight, write-through of dirty blocks, and the masked-write command bit.
// Lint notes: the SWT dirty flag and the three rotate-cause flags of the wear
// monitor are left unread here (tags are stored clean, so the flush needs only
// the W flag; the cause flags are for observation). The asynchronous reset
// also appears in the assertions' disable condition, which lint reports as a
// reset net used synchronously; it is not part of the logic.
module vault_controller
  import monarch_pkg::*;
#(
  parameter int unsigned NUM_BANKS     = 32,
  parameter int unsigned NUM_CAM_BANKS = 2,
  parameter int unsigned NUM_SS        = 1,
  parameter int unsigned QDEPTH        = 4,
  parameter int unsigned MWW_M         = 3,
  parameter longint unsigned T_MWW_CYCLES = 64'd30272000000,
  parameter int unsigned WCNT_W        = 24,
  parameter int unsigned DC_LIMIT      = 8192,
  parameter int unsigned TWR           = T_WRITE
) (
  input  logic               clk,
  input  logic               rst_n,
  input  vault_mode_e        mode,
  // requests from the processor side
  input  logic               req_valid,
  output logic               req_ready,
  input  mreq_t              req,
  output logic               resp_valid,
  output mresp_t             resp,
  // vault channel to the 3D layers
  output logic               st_valid,
  output stack_cmd_t         st_cmd,
  output logic [BLOCK_W-1:0] st_wdata,
  input  logic               st_rvalid,
  input  logic [BLOCK_W-1:0] st_rdata,
  // off-chip main memory
  output logic               mem_valid,
  input  logic               mem_ready,
  output logic               mem_we,
  output logic [PA_W-1:0]    mem_addr,
  output logic [BLOCK_W-1:0] mem_wdata,
  input  logic               mem_rvalid,
  input  logic [BLOCK_W-1:0] mem_rdata,
  // observation
  output ctrl_events_t       ev,
  output logic [2:0]         vault_off
);

  localparam int unsigned NRB    = NUM_BANKS - NUM_CAM_BANKS;
  localparam int unsigned NSSID  = NUM_BANKS * NUM_SS;
  localparam int unsigned SSID_W = (NSSID > 1) ? $clog2(NSSID) : 1;
  localparam int unsigned SSI_W  = (NUM_SS > 1) ? $clog2(NUM_SS) : 1;

  // ---------------- scheduling queue ----------------
  logic  q_valid, q_pop;
  mreq_t q_req;
  sched_queue #(.T(mreq_t), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(q_valid), .out_pop(q_pop), .out_data(q_req));

  // ---------------- wear monitor, t_MWW, address mapper ----------------
  logic              wm_wr, wm_dirty, rot_req, rot_done, swt_w, swt_d;
  logic [SSID_W-1:0] wm_id, swt_id;
  logic [7:0]        bank_off, ss_off;
  logic [2:0]        set_off;
  logic              wm_wrf, wm_wcf, wm_dcf;   // rotate causes, kept for debug visibility
  wear_monitor #(.NUM_SSID(NSSID), .NUM_RAM_BANKS(NRB), .NUM_SS(NUM_SS),
                 .WCNT_W(WCNT_W), .DC_LIMIT(DC_LIMIT)) u_wm (
    .clk, .rst_n, .wr(wm_wr), .ss_id(wm_id), .dirty(wm_dirty),
    .rotate_req(rot_req), .rotate_done(rot_done),
    .swt_q_id(swt_id), .swt_q_w(swt_w), .swt_q_d(swt_d),
    .bank_off, .set_off, .ss_off, .vault_off,
    .wr_flag(wm_wrf), .wc_flag(wm_wcf), .dc_flag(wm_dcf));

  logic              mww_blocked;
  logic [SSID_W-1:0] mww_q;
  mww_limiter #(.ID_W(SSID_W), .M(MWW_M), .T_MWW_CYCLES(T_MWW_CYCLES)) u_mww (
    .clk, .rst_n, .q_id(mww_q), .blocked(mww_blocked), .wr(wm_wr), .wr_id(wm_id));

  logic [UTAG_W-1:0] m_utag;
  logic [BANK_W-1:0] m_dbank;
  logic [SS_W-1:0]   m_ss;
  logic              m_tbank, m_key;
  logic [SET_W-1:0]  m_tset;
  cache_addr_mapper #(.NUM_RAM_BANKS(NRB), .NUM_SS(NUM_SS)) u_map (
    .addr(q_req.addr), .bank_off, .set_off, .ss_off,
    .utag(m_utag), .dbank(m_dbank), .ss(m_ss), .tbank(m_tbank), .key(m_key), .tset(m_tset));

  // ---------------- command timer ----------------
  logic t_ok, t_issue, t_buf;
  cmd_e t_qcmd;
  logic [BANK_W-1:0] t_qbank;
  cmd_timer #(.NUM_BANKS(NUM_BANKS), .TWR(TWR)) u_tim (
    .clk, .rst_n, .issue(t_issue), .issue_cmd(st_cmd.cmd), .issue_bank(st_cmd.bank),
    .buf_only(t_buf), .q_cmd(t_qcmd), .q_bank(t_qbank), .ok(t_ok));

  // ---------------- state ----------------
  typedef enum logic [4:0] {
    S_IDLE, S_MAP, S_ISSUE, S_WAIT_RD, S_MEM, S_MEM_WAIT, S_RESP,
    S_FR_WR, S_FC_SRCH_K, S_FC_SRCH_M, S_FC_SRCH, S_FC_DONE,
    S_C_LOOK, S_C_LMASK, S_C_LSRCH, S_C_LDONE, S_C_HITRD, S_C_EVICT,
    S_C_VROW, S_C_VPICK, S_C_WMASK, S_C_WTAG, S_C_INV_M, S_C_INV,
    S_FL_NEXT, S_FL_WR, S_FL_DONE
  } state_e;

  state_e            st, ret;
  mreq_t             r;              // request being served
  logic [BANK_W-1:0] r_dbank;
  logic [SS_W-1:0]   r_ss;
  logic [UTAG_W-1:0] r_utag;
  logic              r_tbank, r_key;
  logic [SET_W-1:0]  r_tset;

  // issue helper registers
  cmd_e              i_cmd;
  logic [BANK_W-1:0] i_bank;
  logic [SS_W-1:0]   i_ss;
  logic [SET_W-1:0]  i_set;
  logic [IDX_W-1:0]  i_idx;
  logic              i_cam, i_colin, i_mask, i_buf, i_dirty;
  logic [BLOCK_W-1:0] i_data;
  logic [BLOCK_W-1:0] rd_buf;

  // controller's copy of the modes
  logic [NUM_BANKS-1:0]           bank_cam;
  logic [NUM_BANKS*NUM_SS-1:0]    ss_colin;
  // flat-CAM state
  logic [BLOCK_W-1:0]             key_reg, mask_reg;
  logic [NUM_BANKS*NUM_SS-1:0]    km_fresh;
  logic                           mt_valid;
  logic [BANK_W+SS_W+SET_W-1:0]   mt_tag;
  mresp_t                         mt_resp;
  // cache state
  logic [NUM_CAM_BANKS*NUM_SS-1:0] ck_valid, cm_valid;
  logic [UTAG_W:0]                 ck_id [NUM_CAM_BANKS*NUM_SS];
  logic [5:0]                      cm_id [NUM_CAM_BANKS*NUM_SS];
  logic [MIDX_W-1:0]               repl_ctr;
  logic                            c_hit;
  logic [MIDX_W-1:0]               c_idx;
  logic [5:0]                      want_mask;
  // flush walk
  logic [SSID_W-1:0]               fl_ssid;    // CAM superset (bank-major)
  logic [3:0]                      fl_k;       // {half, tset}
  state_e                          after_mask; // where to go once the mask is in place
  logic                            flushing;

  function automatic logic [SSID_W-1:0] ssid(input logic [BANK_W-1:0] b, input logic [SS_W-1:0] s);
    return SSID_W'(32'(b) * NUM_SS + (32'(s) % NUM_SS));
  endfunction

  function automatic logic [BLOCK_W-1:0] rep8(input logic [WORD_W-1:0] w);
    return {SET_ARRAYS{w}};
  endfunction

  // tag word placed in half h of a 64-bit column
  function automatic logic [WORD_W-1:0] half_word(input logic h, input logic [TAG_W-1:0] t);
    return h ? {t, 32'h0} : {32'h0, t};
  endfunction

  // mask block for code {type[1:0], half, j[2:0]}: type 0 lookup (valid+tag,
  // all subarrays), 1 whole tag word of subarray j, 2 valid bit of subarray j
  function automatic logic [BLOCK_W-1:0] mask_blk(input logic [5:0] code);
    logic [WORD_W-1:0] w;
    logic [BLOCK_W-1:0] b;
    unique case (code[5:4])
      2'd0:    w = half_word(code[3], {1'b0, 1'b1, {TAG_ADDR_W{1'b1}}});
      2'd1:    w = half_word(code[3], '1);
      default: w = half_word(code[3], 32'(1) << TAG_VALID_BIT);
    endcase
    if (code[5:4] == 2'd0) b = rep8(w);
    else begin
      b = '0;
      b[code[2:0]*WORD_W +: WORD_W] = w;
    end
    return b;
  endfunction

  logic [SSI_W-1:0] r_ssi;
  assign r_ssi = SSI_W'(r_ss);
  logic [$clog2(NUM_CAM_BANKS*NUM_SS)-1:0] r_cs;   // CAM superset slot
  assign r_cs = $bits(r_cs)'(32'(r_tbank) * NUM_SS + 32'(r_ssi));

  logic [BANK_W-1:0] fl_bank;
  logic [SS_W-1:0]   fl_ss;
  assign fl_bank = BANK_W'(32'(fl_ssid) / NUM_SS);
  assign fl_ss   = SS_W'(32'(fl_ssid) % NUM_SS);
  assign swt_id  = fl_ssid;

  // flat address fields
  logic [BANK_W-1:0] f_bank;
  logic [SS_W-1:0]   f_ss;
  assign f_bank = BANK_W'(32'(r.addr[28:23]) % NUM_BANKS);
  assign f_ss   = SS_W'(32'(r.addr[22:15]) % NUM_SS);

  // current issue target's mode bits
  logic cur_cam, cur_colin;
  assign cur_cam   = bank_cam[i_bank[$clog2(NUM_BANKS > 1 ? NUM_BANKS : 2)-1:0]];
  assign cur_colin = ss_colin[ssid(i_bank, i_ss)];

  always_comb begin
    t_qbank = i_bank;
    if (cur_cam != i_cam)          t_qcmd = CMD_PREPARE;
    else if (cur_colin != i_colin) t_qcmd = CMD_ACTIVATE;
    else                           t_qcmd = i_cmd;
  end

  // command output (one cycle)
  always_comb begin
    st_valid = 1'b0;
    st_cmd   = '{cmd: CMD_NOP, bank: i_bank, ss: i_ss, set: i_set, idx: i_idx, use_mask: i_mask};
    st_wdata = i_data;
    t_buf    = i_buf;
    if (st == S_ISSUE && t_ok) begin
      st_valid   = 1'b1;
      st_cmd.cmd = t_qcmd;
    end
    t_issue = st_valid;
  end

  assign mww_q = (r.op == OP_EVICT) ? ssid(r_dbank, r_ss) : ssid(f_bank, f_ss);
  assign q_pop = (st == S_IDLE) && q_valid && !(rot_req && mode == VM_CACHE);

  logic [MIDX_W:0] pick;
  assign pick = first_one_from(~rd_buf, repl_ctr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE;
      r <= '0; r_dbank <= '0; r_ss <= '0; r_utag <= '0; r_tbank <= 1'b0; r_key <= 1'b0; r_tset <= '0;
      i_cmd <= CMD_NOP; i_bank <= '0; i_ss <= '0; i_set <= '0; i_idx <= '0;
      i_cam <= 1'b0; i_colin <= 1'b0; i_mask <= 1'b0; i_buf <= 1'b0; i_dirty <= 1'b0; i_data <= '0;
      rd_buf <= '0;
      bank_cam <= '0; ss_colin <= '0;
      key_reg <= '0; mask_reg <= '1; km_fresh <= '0;
      mt_valid <= 1'b0; mt_tag <= '0; mt_resp <= '0;
      ck_valid <= '0; cm_valid <= '0;
      for (int k = 0; k < NUM_CAM_BANKS*NUM_SS; k++) begin ck_id[k] <= '0; cm_id[k] <= '0; end
      repl_ctr <= '0; c_hit <= 1'b0; c_idx <= '0; want_mask <= '0;
      fl_ssid <= '0; fl_k <= '0; after_mask <= S_IDLE; flushing <= 1'b0;
      resp_valid <= 1'b0; resp <= '0;
      mem_valid <= 1'b0; mem_we <= 1'b0; mem_addr <= '0; mem_wdata <= '0;
      wm_wr <= 1'b0; wm_id <= '0; wm_dirty <= 1'b0; rot_done <= 1'b0;
      ev <= '0;
    end else begin
      resp_valid <= 1'b0;
      wm_wr      <= 1'b0;
      rot_done   <= 1'b0;
      ev         <= '0;
      unique case (st)
        // -------------------------------------------------------------
        S_IDLE: begin
          if (rot_req && mode == VM_CACHE) begin
            fl_ssid <= ssid(BANK_W'(NRB), '0);
            fl_k    <= '0;
            flushing <= 1'b1;
            st      <= S_FL_NEXT;
          end else if (q_valid) begin
            r <= q_req;
            r_dbank <= m_dbank; r_ss <= m_ss; r_utag <= m_utag;
            r_tbank <= m_tbank; r_key <= m_key; r_tset <= m_tset;
            resp <= '0;
            st <= S_MAP;
          end
        end
        // -------------------------------------------------------------
        S_MAP: begin
          i_bank <= f_bank; i_ss <= f_ss; i_set <= r.addr[14:12]; i_idx <= r.addr[11:6];
          i_mask <= 1'b0; i_buf <= 1'b0; i_dirty <= 1'b0; i_data <= r.wdata;
          unique case (mode)
            VM_FLAT_RAM: begin
              i_cam <= 1'b0; i_colin <= 1'b0;
              if (r.op == OP_WRITE) begin
                if (mww_blocked) ev.mww_block <= 1'b1;   // strict blocking: wait
                else begin i_cmd <= CMD_WRITE; ret <= S_RESP; st <= S_ISSUE; end
              end else begin
                i_cmd <= CMD_READ; ret <= S_FR_WR; st <= S_ISSUE;
              end
            end
            VM_FLAT_CAM: begin
              unique case (r.op)
                OP_KEY_WR:  begin key_reg  <= r.wdata; km_fresh <= '0; mt_valid <= 1'b0; st <= S_RESP; end
                OP_MASK_WR: begin mask_reg <= r.wdata; km_fresh <= '0; mt_valid <= 1'b0; st <= S_RESP; end
                OP_WRITE: begin
                  if (mww_blocked) ev.mww_block <= 1'b1;
                  else begin
                    i_cam <= 1'b1; i_colin <= 1'b1; i_cmd <= CMD_WRITE;
                    if (mt_tag[BANK_W+SS_W+SET_W-1:SET_W] == {f_bank, f_ss}) mt_valid <= 1'b0;
                    ret <= S_RESP; st <= S_ISSUE;
                  end
                end
                OP_SEARCH: begin
                  if (mt_valid && mt_tag == {f_bank, f_ss, r.addr[14:12]}) begin
                    resp <= mt_resp; ev.match_reuse <= 1'b1; st <= S_RESP;
                  end else st <= S_FC_SRCH_K;
                end
                default: begin   // data read: row read with Ref_R
                  i_cam <= 1'b0; i_colin <= 1'b0; i_cmd <= CMD_READ; ret <= S_FR_WR; st <= S_ISSUE;
                end
              endcase
            end
            default: begin   // cache
              if (r.op == OP_EVICT && !r.rd && !r.dirty) begin
                ev.skip <= 1'b1; st <= S_RESP;
              end else begin
                if (r.op == OP_EVICT && r.dirty) begin   // write-through / forward
                  mem_valid <= 1'b1; mem_we <= 1'b1; mem_wdata <= r.wdata;
                  mem_addr <= r.addr & ~PA_W'(63);
                  if (!r.rd) ev.forward <= 1'b1;
                end
                st <= S_C_LOOK;
              end
            end
          endcase
        end
        // -------------------------------------------------------------
        // issue helper: prepare / activate as needed, then the command
        S_ISSUE: begin
          if (t_ok) begin
            if (cur_cam != i_cam) begin
              bank_cam[i_bank[$clog2(NUM_BANKS > 1 ? NUM_BANKS : 2)-1:0]] <= i_cam;
              ev.prepare <= 1'b1;
            end else if (cur_colin != i_colin) begin
              ss_colin[ssid(i_bank, i_ss)] <= i_colin;
              ev.activate <= 1'b1;
            end else if (i_cmd == CMD_READ) begin
              st <= S_WAIT_RD;
            end else begin
              if (!i_buf && !flushing) begin
                wm_wr <= 1'b1; wm_id <= ssid(i_bank, i_ss); wm_dirty <= i_dirty;
              end else if (i_buf) ev.keymask_xfer <= 1'b1;
              st <= ret;
            end
          end
        end
        S_WAIT_RD: if (st_rvalid) begin rd_buf <= st_rdata; st <= ret; end
        // -------------------------------------------------------------
        S_FR_WR: begin resp.rdata <= rd_buf; st <= S_RESP; end
        S_RESP: begin
          if (!mem_valid) begin resp_valid <= 1'b1; st <= S_IDLE; end
        end
        // ------------------------- flat-CAM search --------------------
        S_FC_SRCH_K: begin
          i_bank <= f_bank; i_ss <= f_ss; i_set <= r.addr[14:12]; i_mask <= 1'b0;
          if (km_fresh[ssid(f_bank, f_ss)]) st <= S_FC_SRCH;
          else begin
            i_cam <= 1'b1; i_colin <= 1'b0; i_cmd <= CMD_WRITE; i_buf <= 1'b1;
            i_idx <= '0; i_data <= key_reg; ret <= S_FC_SRCH_M; st <= S_ISSUE;
          end
        end
        S_FC_SRCH_M: begin
          i_idx <= 6'd1; i_data <= mask_reg; ret <= S_FC_SRCH; st <= S_ISSUE;
          km_fresh[ssid(f_bank, f_ss)] <= 1'b1;
        end
        S_FC_SRCH: begin
          i_cam <= 1'b1; i_colin <= 1'b1; i_cmd <= CMD_READ; i_buf <= 1'b0; i_idx <= '0;
          ev.search <= 1'b1; ret <= S_FC_DONE; st <= S_ISSUE;
        end
        S_FC_DONE: begin
          logic [MIDX_W:0] f;
          f = first_one_from(rd_buf, '0);
          resp.rdata <= rd_buf; resp.match_valid <= f[MIDX_W]; resp.match_idx <= f[MIDX_W-1:0];
          mt_resp <= '{rdata: rd_buf, hit: 1'b0, match_valid: f[MIDX_W], match_idx: f[MIDX_W-1:0]};
          mt_valid <= 1'b1; mt_tag <= {f_bank, f_ss, r.addr[14:12]};
          st <= S_RESP;
        end
        // ------------------------- cache lookup -----------------------
        S_C_LOOK: begin
          if (mem_valid && mem_ready) mem_valid <= 1'b0;
          i_bank <= BANK_W'(NRB + 32'(r_tbank)); i_ss <= r_ss; i_set <= r_tset; i_mask <= 1'b0;
          i_cam <= 1'b1; i_colin <= 1'b0; i_cmd <= CMD_WRITE; i_buf <= 1'b1;
          want_mask <= {2'd0, r_key, 3'd0}; after_mask <= S_C_LSRCH;
          if (ck_valid[r_cs] && ck_id[r_cs] == {r_utag, r_key}) st <= S_C_LMASK;
          else begin
            i_idx <= '0;
            i_data <= rep8(half_word(r_key, {1'b0, 1'b1, TAG_ADDR_W'(r_utag)}));
            ck_valid[r_cs] <= 1'b1; ck_id[r_cs] <= {r_utag, r_key};
            ret <= S_C_LMASK; st <= S_ISSUE;
          end
        end
        S_C_LMASK: begin
          if (mem_valid && mem_ready) mem_valid <= 1'b0;
          if (cm_valid[r_cs] && cm_id[r_cs] == want_mask) st <= after_mask;
          else begin
            i_cam <= 1'b1; i_colin <= 1'b0; i_cmd <= CMD_WRITE; i_buf <= 1'b1;
            i_idx <= 6'd1; i_data <= mask_blk(want_mask);
            cm_valid[r_cs] <= 1'b1; cm_id[r_cs] <= want_mask;
            ret <= after_mask; st <= S_ISSUE;
          end
        end
        S_C_LSRCH: begin
          if (mem_valid && mem_ready) mem_valid <= 1'b0;
          i_cam <= 1'b1; i_colin <= 1'b1; i_cmd <= CMD_READ; i_buf <= 1'b0; i_idx <= '0;
          ev.search <= 1'b1; ret <= S_C_LDONE; st <= S_ISSUE;
        end
        S_C_LDONE: begin
          logic [MIDX_W:0] f;
          if (mem_valid && mem_ready) mem_valid <= 1'b0;
          f = first_one_from(rd_buf, '0);
          c_hit <= f[MIDX_W]; c_idx <= f[MIDX_W-1:0];
          if (f[MIDX_W]) ev.hit <= 1'b1; else ev.miss <= 1'b1;
          st <= (r.op == OP_EVICT) ? S_C_EVICT : S_C_HITRD;
        end
        S_C_HITRD: begin
          if (c_hit) begin
            i_bank <= r_dbank; i_ss <= r_ss; i_set <= c_idx[8:6]; i_idx <= c_idx[5:0];
            i_cam <= 1'b0; i_colin <= 1'b0; i_cmd <= CMD_READ; i_buf <= 1'b0;
            resp.hit <= 1'b1; ret <= S_FR_WR; st <= S_ISSUE;
          end else begin          // miss: no-allocate, read main memory
            mem_valid <= 1'b1; mem_we <= 1'b0; mem_addr <= r.addr & ~PA_W'(63);
            st <= S_MEM;
          end
        end
        S_MEM: if (mem_ready) begin mem_valid <= 1'b0; st <= S_MEM_WAIT; end
        S_MEM_WAIT: if (mem_rvalid) begin resp.rdata <= mem_rdata; st <= S_RESP; end
        // ------------------------- cache eviction from L3 -------------
        S_C_EVICT: begin
          if (mem_valid && mem_ready) mem_valid <= 1'b0;
          i_dirty <= r.dirty;
          if (c_hit && r.rd && !mww_blocked) begin          // update the block
            i_bank <= r_dbank; i_ss <= r_ss; i_set <= c_idx[8:6]; i_idx <= c_idx[5:0];
            i_cam <= 1'b0; i_colin <= 1'b0; i_cmd <= CMD_WRITE; i_buf <= 1'b0; i_mask <= 1'b0;
            i_data <= r.wdata; resp.hit <= 1'b1; ret <= S_RESP; st <= S_ISSUE;
          end else if (c_hit) begin                          // stale copy: invalidate
            if (mww_blocked) ev.mww_block <= 1'b1;
            want_mask <= {2'd2, r_key, c_idx[8:6]}; after_mask <= S_C_INV;
            i_bank <= BANK_W'(NRB + 32'(r_tbank)); i_ss <= r_ss; i_set <= r_tset;
            st <= S_C_LMASK;
          end else if (!r.rd || mww_blocked) begin           // not installed
            if (mww_blocked) ev.mww_block <= 1'b1;
            st <= S_RESP;
          end else begin                                     // install: read valid bits
            i_bank <= BANK_W'(NRB + 32'(r_tbank)); i_ss <= r_ss; i_set <= r_tset;
            i_idx <= IDX_W'({r_key, 5'd30});
            i_cam <= 1'b0; i_colin <= 1'b0; i_cmd <= CMD_READ; i_buf <= 1'b0;
            ret <= S_C_VPICK; st <= S_ISSUE;
          end
        end
        S_C_VPICK: begin
          if (mem_valid && mem_ready) mem_valid <= 1'b0;
          c_idx <= pick[MIDX_W] ? pick[MIDX_W-1:0] : repl_ctr;
          repl_ctr <= repl_ctr + 1'b1;
          ev.install <= 1'b1;
          // data block into the RAM superset
          i_bank <= r_dbank; i_ss <= r_ss;
          i_set <= pick[MIDX_W] ? pick[8:6] : repl_ctr[8:6];
          i_idx <= pick[MIDX_W] ? pick[5:0] : repl_ctr[5:0];
          i_cam <= 1'b0; i_colin <= 1'b0; i_cmd <= CMD_WRITE; i_buf <= 1'b0; i_mask <= 1'b0;
          i_data <= r.wdata; ret <= S_C_WMASK; st <= S_ISSUE;
        end
        S_C_WMASK: begin
          want_mask <= {2'd1, r_key, c_idx[8:6]}; after_mask <= S_C_WTAG;
          i_bank <= BANK_W'(NRB + 32'(r_tbank)); i_ss <= r_ss; i_set <= r_tset;
          st <= S_C_LMASK;
        end
        S_C_WTAG: begin     // masked column write of the tag word (stored clean)
          i_cam <= 1'b1; i_colin <= 1'b1; i_cmd <= CMD_WRITE; i_buf <= 1'b0; i_mask <= 1'b1;
          i_idx <= c_idx[5:0]; i_dirty <= 1'b0;
          i_data <= rep8(half_word(r_key, {1'b0, 1'b1, TAG_ADDR_W'(r_utag)}));
          ret <= S_RESP; st <= S_ISSUE;
        end
        S_C_INV: begin      // masked column write clearing the valid bit
          i_cam <= 1'b1; i_colin <= 1'b1; i_cmd <= CMD_WRITE; i_buf <= 1'b0; i_mask <= 1'b1;
          i_idx <= c_idx[5:0]; i_dirty <= 1'b0; i_data <= '0;
          ret <= S_RESP; st <= S_ISSUE;
        end
        // ------------------------- rotation flush ---------------------
        S_FL_NEXT: begin
          if (!swt_w) begin
            fl_k <= '0;
            if (32'(fl_ssid) == NSSID - 1) st <= S_FL_DONE;
            else fl_ssid <= fl_ssid + 1'b1;
          end else st <= S_FL_WR;
        end
        S_FL_WR: begin      // row write of zeros into the valid-bit row of one tag set
          i_bank <= fl_bank; i_ss <= fl_ss; i_set <= fl_k[2:0];
          i_idx <= IDX_W'({fl_k[3], 5'd30}); i_data <= '0;
          i_cam <= 1'b0; i_colin <= 1'b0; i_cmd <= CMD_WRITE; i_buf <= 1'b0; i_mask <= 1'b0;
          fl_k <= fl_k + 1'b1;
          if (fl_k == 4'd15) begin
            ret <= (32'(fl_ssid) == NSSID - 1) ? S_FL_DONE : S_FL_NEXT;
            if (32'(fl_ssid) != NSSID - 1) fl_ssid <= fl_ssid + 1'b1;
          end else ret <= S_FL_WR;
          st <= S_ISSUE;
        end
        S_FL_DONE: begin
          rot_done <= 1'b1; ev.rotate <= 1'b1; flushing <= 1'b0;
          ck_valid <= '0;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
