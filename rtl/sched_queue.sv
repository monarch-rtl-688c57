// sched_queue: the scheduling queue between the address mapper and the
// command scheduler of a vault controller: a synchronous FIFO of requests.
//
// push when 'in_valid && in_ready'; the head is visible on out_data while
// out_valid is high and is removed by 'out_pop'. DEPTH entries (a power of
// two). The paper names the queue only; the depth of 4 and the valid/ready
// handshake are this design's choices.
module sched_queue #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_pop,
  output T     out_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  T              mem [DEPTH];
  logic [AW:0]   wp, rp;

  assign in_ready  = (wp - rp) != (AW+1)'(DEPTH);
  assign out_valid = wp != rp;
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_pop && out_valid) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_pop |-> out_valid);

endmodule
