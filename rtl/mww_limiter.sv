// mww_limiter: enforces the t_MWW write window per superset.
//
// At most LIMIT = 512*M XAM writes are allowed to a superset within a window
// of T_MWW_CYCLES cycles. The counts are buffered in a small direct-mapped
// table (ENTRIES entries of {valid, superset id, count, window start}),
// indexed by the low bits of the superset id and compared with a
// free-running cycle counter. 'blocked' tells, combinationally, whether a
// write to q_id would exceed the limit inside the current window; 'wr'
// records one write to wr_id (a new window starts when the entry is absent,
// belongs to another superset, or its window has expired).
// The rule and M follow the paper (t_MWW = M*T_life/n_W; 3 writes per block,
// 10-year life and 1e8 endurance give 9.46 s, 3.03e10 cycles at 3.2 GHz).
// The paper keeps the full count table in main memory and buffers it
// TLB-like on chip; here an entry that is replaced is simply forgotten, so
// the guarantee holds only while the table covers the written supersets.
// 64 entries of 64 bits match the 4 KB buffer the paper budgets for 8 vaults.
module mww_limiter #(
  parameter int unsigned ID_W         = 5,
  parameter int unsigned ENTRIES      = 64,
  parameter int unsigned M            = 3,
  parameter int unsigned BLOCKS       = 512,
  parameter longint unsigned T_MWW_CYCLES = 64'd30272000000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [ID_W-1:0] q_id,
  output logic            blocked,
  input  logic            wr,
  input  logic [ID_W-1:0] wr_id
);

  localparam int unsigned LIMIT = BLOCKS * M;
  localparam int unsigned EI_W  = $clog2(ENTRIES);
  localparam int unsigned CNT_W = $clog2(LIMIT + 1);

  logic              e_valid [ENTRIES];
  logic [ID_W-1:0]   e_id    [ENTRIES];
  logic [CNT_W-1:0]  e_cnt   [ENTRIES];
  logic [63:0]       e_start [ENTRIES];
  logic [63:0]       now;

  function automatic logic [EI_W-1:0] slot(input logic [ID_W-1:0] id);
    return EI_W'(id);
  endfunction

  function automatic logic live(input logic v, input logic [ID_W-1:0] eid,
                                input logic [ID_W-1:0] id, input logic [63:0] st,
                                input logic [63:0] t);
    return v && eid == id && (t - st) < T_MWW_CYCLES;
  endfunction

  always_comb begin
    logic [EI_W-1:0] s;
    s = slot(q_id);
    blocked = live(e_valid[s], e_id[s], q_id, e_start[s], now) && 32'(e_cnt[s]) >= LIMIT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0;
      for (int e = 0; e < ENTRIES; e++) begin
        e_valid[e] <= 1'b0;
        e_id[e]    <= '0;
        e_cnt[e]   <= '0;
        e_start[e] <= '0;
      end
    end else begin
      now <= now + 1'b1;
      if (wr) begin
        if (live(e_valid[slot(wr_id)], e_id[slot(wr_id)], wr_id, e_start[slot(wr_id)], now)) begin
          if (32'(e_cnt[slot(wr_id)]) < LIMIT) e_cnt[slot(wr_id)] <= e_cnt[slot(wr_id)] + 1'b1;
        end else begin
          e_valid[slot(wr_id)] <= 1'b1;
          e_id[slot(wr_id)]    <= wr_id;
          e_cnt[slot(wr_id)]   <= CNT_W'(1);
          e_start[slot(wr_id)] <= now;
        end
      end
    end
  end

endmodule
