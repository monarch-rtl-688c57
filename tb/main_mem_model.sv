// main_mem_model: behavioural off-chip main memory for testbenches.
// Accepts one request per cycle (ready always high); a read returns its
// 64-byte block LAT cycles later. Unwritten blocks read as a pattern derived
// from the address, so a test can predict them without writing them first.
module main_mem_model
  import monarch_pkg::*;
#(
  parameter int unsigned LAT = 10
) (
  input  logic               clk,
  input  logic               valid,
  output logic               ready,
  input  logic               we,
  input  logic [PA_W-1:0]    addr,
  input  logic [BLOCK_W-1:0] wdata,
  output logic               rvalid,
  output logic [BLOCK_W-1:0] rdata
);
  logic [BLOCK_W-1:0] store [logic [PA_W-1:0]];
  int unsigned writes = 0;

  function automatic logic [BLOCK_W-1:0] pattern(input logic [PA_W-1:0] a);
    logic [BLOCK_W-1:0] p;
    for (int k = 0; k < 16; k++) p[k*32 +: 32] = 32'(a) * 32'h9E3779B1 + 32'(k);
    return p;
  endfunction

  function automatic logic [BLOCK_W-1:0] peek(input logic [PA_W-1:0] a);
    return store.exists(a) ? store[a] : pattern(a);
  endfunction

  assign ready = 1'b1;
  initial begin rvalid = 1'b0; rdata = '0; end

  always @(posedge clk) begin
    if (valid) begin
      if (we) begin
        store[addr] = wdata;
        writes++;
      end else begin
        automatic logic [PA_W-1:0] a = addr;
        fork begin
          repeat (LAT) @(posedge clk);
          rdata  <= peek(a);
          rvalid <= 1'b1;
          @(posedge clk);
          rvalid <= 1'b0;
        end join_none
      end
    end
  end
endmodule
