// xam_bank: one Monarch bank, NUM_SS supersets behind a shared command port,
// plus the bank's sensing mode.
//
// The bank mode flag (0 = RAM, read reference Ref_R; 1 = CAM, search
// reference Ref_S) starts in RAM mode after reset and is toggled by each
// prepare command; it is broadcast to every superset of the bank. Activate,
// read and write commands are steered to the superset named in the command.
// Read data of the addressed superset appears on rdata the cycle after the
// read (the superset registers it). 'busy' is the OR of the supersets' write
// activity. The toggle semantics and the RAM reset mode are from the paper;
// the bank-level voltage converters that switch the reference are analog and
// are represented only by the mode flag.
module xam_bank
  import monarch_pkg::*;
#(
  parameter int unsigned NUM_SS      = 1,
  parameter int unsigned STEP_CYCLES = (T_WRITE + 1) / 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sel,        // command addressed to this bank
  input  stack_cmd_t         cmd,
  input  logic [BLOCK_W-1:0] wdata,
  output logic [BLOCK_W-1:0] rdata,
  output logic               cam_mode,
  output logic               busy
);

  localparam int unsigned SSI_W = (NUM_SS > 1) ? $clog2(NUM_SS) : 1;

  logic [NUM_SS-1:0]              ss_busy;
  logic [NUM_SS-1:0][BLOCK_W-1:0] ss_rdata;
  logic [SSI_W-1:0]               ss_q;      // superset of the last read
  logic [SSI_W-1:0]               ss_sel;

  assign ss_sel = SSI_W'(cmd.ss);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cam_mode <= 1'b0;
      ss_q     <= '0;
    end else if (sel) begin
      if (cmd.cmd == CMD_PREPARE) cam_mode <= ~cam_mode;
      if (cmd.cmd == CMD_READ)    ss_q     <= ss_sel;
    end
  end

  for (genvar s = 0; s < NUM_SS; s++) begin : g_ss
    logic hit;
    assign hit = sel && (ss_sel == SSI_W'(s));
    superset #(.STEP_CYCLES(STEP_CYCLES)) u_ss (
      .clk, .rst_n,
      .bank_cam (cam_mode),
      .act      (hit && cmd.cmd == CMD_ACTIVATE),
      .wr       (hit && cmd.cmd == CMD_WRITE),
      .rd       (hit && cmd.cmd == CMD_READ),
      .set      (cmd.set),
      .idx      (cmd.idx),
      .use_mask (cmd.use_mask),
      .wdata    (wdata),
      .rdata    (ss_rdata[s]),
      .busy     (ss_busy[s]),
      .colin    ()
    );
  end

  assign rdata = ss_rdata[ss_q];
  assign busy  = |ss_busy;

endmodule
