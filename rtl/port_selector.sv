// port_selector: chooses which input port (RowIn or ColumnIn) of which
// subarrays of a superset receives the superset buffers.
//
// The superset is an 8x8 grid of subarrays. The subarray at grid row i and
// grid column j belongs to set k = (j - i) mod 8, so every set has exactly one
// subarray in each grid column and all eight can share the per-column data
// trees. The selector holds a one-bit mode latch (0 = RowIn, 1 = ColumnIn)
// that an activate command toggles, and a 3-to-8 decoder of the set number;
// a subarray is enabled when the decoder output of its diagonal is set. Both
// parts are as the paper describes them; the reset value RowIn and the
// registered (one clock edge) toggle are this design's choices.
//
// Outputs are combinational from the latch and the 'set' input.
module port_selector
  import monarch_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          activate,   // toggle RowIn <-> ColumnIn
  input  logic [SET_W-1:0]              set,
  output logic                          colin,      // current mode flag
  output logic [SS_SETS-1:0][SET_ARRAYS-1:0] en,    // en[i][j]: subarray selected
  output logic [SS_SETS-1:0][SET_ARRAYS-1:0] row_port,
  output logic [SS_SETS-1:0][SET_ARRAYS-1:0] col_port
);

  logic [SS_SETS-1:0] dec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        colin <= 1'b0;
    else if (activate) colin <= ~colin;
  end

  always_comb begin
    dec = '0;
    dec[set] = 1'b1;
    for (int i = 0; i < SS_SETS; i++) begin
      for (int j = 0; j < SET_ARRAYS; j++) begin
        en[i][j]       = dec[SET_W'(j - i)];
        row_port[i][j] = en[i][j] & ~colin;
        col_port[i][j] = en[i][j] &  colin;
      end
    end
  end

endmodule
