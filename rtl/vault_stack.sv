// vault_stack: the memory side of one Monarch vault, i.e. the banks of the
// vault on the 3D layers sharing the vault's command/address/data channel.
//
// One command per cycle is accepted on the channel (the vault controller is
// responsible for all timing rules). The command is decoded to its bank.
// Read data of a read (or search) command is returned on rvalid/rdata
// exactly T_CAS + T_BL cycles after the command: the bank delivers it one
// cycle after the command and a delay line carries it the rest of the way,
// so reads to different banks may be pipelined one per cycle. Write data
// travels with the write command (the separate data burst of the real
// channel is folded into the command cycle). bank_cam and bank_busy expose
// the banks' modes and write activity for checking.
// The command set and the read latency t_CAS + t_BURST follow the paper's
// interface; carrying write data with the command is this design's choice.
module vault_stack
  import monarch_pkg::*;
#(
  parameter int unsigned NUM_BANKS   = 32,
  parameter int unsigned NUM_SS      = 1,
  parameter int unsigned RD_LAT      = T_CAS + T_BL,
  parameter int unsigned STEP_CYCLES = (T_WRITE + 1) / 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  input  stack_cmd_t              cmd,
  input  logic [BLOCK_W-1:0]      wdata,
  output logic                    rvalid,
  output logic [BLOCK_W-1:0]      rdata,
  output logic [NUM_BANKS-1:0]    bank_cam,
  output logic [NUM_BANKS-1:0]    bank_busy
);

  localparam int unsigned BI_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;

  logic [NUM_BANKS-1:0][BLOCK_W-1:0] bank_rdata;
  logic [BI_W-1:0]                   rd_bank_q;
  logic                              rd_q;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    xam_bank #(.NUM_SS(NUM_SS), .STEP_CYCLES(STEP_CYCLES)) u_bank (
      .clk, .rst_n,
      .sel      (cmd_valid && BI_W'(cmd.bank) == BI_W'(b)),
      .cmd      (cmd),
      .wdata    (wdata),
      .rdata    (bank_rdata[b]),
      .cam_mode (bank_cam[b]),
      .busy     (bank_busy[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= 1'b0;
      rd_bank_q <= '0;
    end else begin
      rd_q <= cmd_valid && cmd.cmd == CMD_READ;
      if (cmd_valid && cmd.cmd == CMD_READ) rd_bank_q <= BI_W'(cmd.bank);
    end
  end

  // delay line: stage 0 is the bank output one cycle after the command
  logic [RD_LAT-1:1]               dv;
  logic [RD_LAT-1:1][BLOCK_W-1:0]  dd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv <= '0;
      dd <= '0;
    end else begin
      for (int k = RD_LAT - 1; k > 1; k--) begin
        dv[k] <= dv[k-1];
        dd[k] <= dd[k-1];
      end
      dv[1] <= rd_q;
      dd[1] <= bank_rdata[rd_bank_q];
    end
  end

  assign rvalid = dv[RD_LAT-1];
  assign rdata  = dd[RD_LAT-1];

  // commands may not target a bank that is still writing
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && cmd.cmd != CMD_NOP |-> !bank_busy[BI_W'(cmd.bank)]);

endmodule
