// xam_array: one XAM subarray, a crosspoint of differential 2R cells that can
// be written by rows or by columns, read by rows and searched by columns.
//
// The cell array is held as one ROWS-bit word per column (a v-line and the
// cells on it). The analog behaviour is reduced to its logical effect:
//  * row write (RowIn port, v-line drivers): two steps. In step 0 the cells of
//    row 'idx' whose data bit is 0 are programmed to 0; in step 1 the cells
//    whose data bit is 1 are programmed to 1. The other rows see V/2 and keep
//    their value.
//  * column write (ColumnIn port, h-line drivers): the same two steps on
//    column 'idx'; when 'use_wmask' is set only rows whose bit in 'wmask' is 1
//    are driven (partial update with the mask buffer).
//  * sensing (v-line sense amplifiers): with the read reference selected
//    (ref_search=0) the output is row 'idx'; with the search reference
//    selected (ref_search=1) output bit c is 1 when column c equals 'key' on
//    every row whose 'mask' bit is 1 (bitwise XNOR of the differential cells,
//    a single mismatch pulls the v-line below the reference).
// The two write steps, the sensing equations and the mask semantics follow
// the paper; treating a masked-off row as "not driven" during search and
// column write is this design's choice. Writes take effect at the clock edge
// while their step input is asserted; sensing is combinational. There is no
// reset: the cell contents are non-volatile storage.
module xam_array
  import monarch_pkg::*;
#(
  parameter int unsigned ROWS = XAM_ROWS,
  parameter int unsigned COLS = XAM_COLS
) (
  input  logic                      clk,
  input  logic                      row_wr,     // RowIn write step active
  input  logic                      col_wr,     // ColumnIn write step active
  input  logic                      wr_step,    // 0: write 0s, 1: write 1s
  input  logic [$clog2(ROWS)-1:0]   row_idx,    // row for row write / row read
  input  logic [$clog2(COLS)-1:0]   col_idx,    // column for column write
  input  logic [COLS-1:0]           row_data,   // data fed to the v-lines
  input  logic [ROWS-1:0]           col_data,   // data fed to the h-lines
  input  logic                      use_wmask,
  input  logic [ROWS-1:0]           wmask,
  input  logic                      ref_search, // bank reference: 0 Ref_R, 1 Ref_S
  input  logic [ROWS-1:0]           key,
  input  logic [ROWS-1:0]           mask,
  output logic [COLS-1:0]           sense       // sense-amplifier outputs
);

  logic [ROWS-1:0] cells [COLS];

  logic [ROWS-1:0] rsel, cmask;
  assign rsel  = ROWS'(1) << row_idx;
  assign cmask = (use_wmask ? wmask : '1) & ~(col_data ^ {ROWS{wr_step}});

  always_ff @(posedge clk) begin
    for (int c = 0; c < COLS; c++) begin
      if (row_wr && row_data[c] == wr_step)
        cells[c] <= (cells[c] & ~rsel) | (rsel & {ROWS{wr_step}});
      else if (col_wr && c == int'(col_idx))
        cells[c] <= (cells[c] & ~cmask) | (cmask & {ROWS{wr_step}});
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (ref_search) sense[c] = &(~(cells[c] ^ key) | ~mask);
      else            sense[c] = cells[c][row_idx];
    end
  end

  // a row write and a column write never share a cycle (the port selector
  // drives only one port of an array)
  assert property (@(posedge clk) !(row_wr && col_wr));

endmodule
