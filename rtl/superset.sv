// superset: 64 XAM subarrays arranged as 8 diagonal sets, with the data, key
// and mask buffers and the port selector that share the superset's data and
// address trees.
//
// A block is 512 bits: word j (bits 64j+63..64j) belongs to the subarray of
// the selected set that sits in grid column j. Commands (one per cycle):
//  * activate: toggles the port selector between RowIn and ColumnIn.
//  * write: with the bank in CAM mode and the port in RowIn mode the block is
//    not written to the arrays; it goes to the key buffer (even idx) or the
//    mask buffer (odd idx). Otherwise the block is latched in the data buffer
//    and written to row idx (RowIn) or column idx (ColumnIn) of the eight
//    subarrays of the set in two steps of STEP_CYCLES each: 0s first, then
//    1s. A ColumnIn write with use_mask set only touches the rows whose mask
//    buffer bit is 1 (partial update). 'busy' is high while a write runs.
//  * read: with the bank in RAM mode returns row idx of the set; in CAM mode
//    returns the 512-bit match vector of the set against the key and mask
//    buffers (word j is matched against key/mask word j). rdata is registered
//    and valid the cycle after the read.
// The buffer roles, the odd/even rule and the diagonal organisation follow the
// paper. The step length, the one-cycle read register, the reset value of the
// mask buffer (all ones) and the use_mask command bit are this design's
// choices.
module superset
  import monarch_pkg::*;
#(
  parameter int unsigned STEP_CYCLES = (T_WRITE + 1) / 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               bank_cam,   // bank sensing reference: 1 = Ref_S
  input  logic               act,
  input  logic               wr,
  input  logic               rd,
  input  logic [SET_W-1:0]   set,
  input  logic [IDX_W-1:0]   idx,
  input  logic               use_mask,
  input  logic [BLOCK_W-1:0] wdata,
  output logic [BLOCK_W-1:0] rdata,
  output logic               busy,
  output logic               colin
);

  localparam int unsigned CNT_W = $clog2(STEP_CYCLES + 1);

  logic [BLOCK_W-1:0] data_buf, key_buf, mask_buf;
  logic [SET_W-1:0]   wr_set;
  logic [IDX_W-1:0]   wr_idx;
  logic               wr_mask;
  logic               wr_active, wr_step;
  logic [CNT_W-1:0]   step_cnt;

  // ---------------- port selector ----------------
  logic [SET_W-1:0] sel_set;
  logic [SS_SETS-1:0][SET_ARRAYS-1:0] row_port, col_port;

  assign sel_set = wr_active ? wr_set : set;

  port_selector u_psel (
    .clk, .rst_n, .activate(act), .set(sel_set),
    .colin, .en(), .row_port, .col_port
  );

  // ---------------- buffers and write sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_buf   <= '0;
      mask_buf  <= '1;
      data_buf  <= '0;
      wr_set    <= '0;
      wr_idx    <= '0;
      wr_mask   <= 1'b0;
      wr_active <= 1'b0;
      wr_step   <= 1'b0;
      step_cnt  <= '0;
    end else if (wr_active) begin
      if (step_cnt == CNT_W'(STEP_CYCLES - 1)) begin
        step_cnt <= '0;
        if (wr_step) wr_active <= 1'b0;
        wr_step <= ~wr_step;
      end else begin
        step_cnt <= step_cnt + 1'b1;
      end
    end else if (wr) begin
      if (bank_cam && !colin) begin
        if (idx[0]) mask_buf <= wdata;
        else        key_buf  <= wdata;
      end else begin
        data_buf  <= wdata;
        wr_set    <= set;
        wr_idx    <= idx;
        wr_mask   <= use_mask;
        wr_active <= 1'b1;
        wr_step   <= 1'b0;
        step_cnt  <= '0;
      end
    end
  end

  assign busy = wr_active;

  // ---------------- subarray grid ----------------
  logic [SS_SETS-1:0][SET_ARRAYS-1:0][WORD_W-1:0] sense;
  logic [BLOCK_W-1:0] set_out;

  for (genvar i = 0; i < SS_SETS; i++) begin : g_row
    for (genvar j = 0; j < SET_ARRAYS; j++) begin : g_col
      xam_array u_arr (
        .clk,
        .row_wr    (wr_active && row_port[i][j]),
        .col_wr    (wr_active && col_port[i][j]),
        .wr_step   (wr_step),
        .row_idx   (wr_active ? wr_idx : idx),
        .col_idx   (wr_idx),
        .row_data  (data_buf[j*WORD_W +: WORD_W]),
        .col_data  (data_buf[j*WORD_W +: WORD_W]),
        .use_wmask (wr_mask),
        .wmask     (mask_buf[j*WORD_W +: WORD_W]),
        .ref_search(bank_cam),
        .key       (key_buf[j*WORD_W +: WORD_W]),
        .mask      (mask_buf[j*WORD_W +: WORD_W]),
        .sense     (sense[i][j])
      );
    end
  end

  // column j of the grid: the subarray of set 'set' sits in grid row (j - set) mod 8
  always_comb begin
    for (int j = 0; j < SET_ARRAYS; j++)
      set_out[j*WORD_W +: WORD_W] = sense[SET_W'(j - int'(set))][j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (rd) rdata <= set_out;
  end

  // commands are not accepted while a write is running
  assert property (@(posedge clk) disable iff (!rst_n) wr_active |-> !(wr || rd || act));

endmodule
