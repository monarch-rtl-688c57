// cmd_timer: the interface timing counters of one vault controller.
//
// For every bank two down-counters hold the cycles still to wait before the
// next read/write ('rw') and before the next prepare/activate ('pa') may be
// issued to it; a shared counter enforces t_RRD between any two commands.
// issue/issue_cmd/issue_bank load the counters when a command goes out:
//   prepare : rw = pa = t_RP
//   activate: rw = t_RCD, pa = t_RAS
//   read    : rw = t_CCD-R, pa = t_RTP
//   write   : rw = pa = t_CWD + t_BURST + t_WRITE (the array write must end:
//             t_CCD-W is the max of the interconnect delay and t_WRITE);
//             a key/mask buffer write ('buf_only') only needs t_CWD + t_BURST
// 'ok' tells, combinationally, whether command 'q_cmd' may go to 'q_bank'
// in this cycle. The parameter list and their meaning follow the paper's
// timing table; the pairing of the parameters with the counters and the
// buffer-only write time are this design's reading of it.
module cmd_timer
  import monarch_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32,
  parameter int unsigned TRP   = T_RP,
  parameter int unsigned TRCD  = T_RCD,
  parameter int unsigned TRAS  = T_RAS,
  parameter int unsigned TCCDR = T_CCD_R,
  parameter int unsigned TRTP  = T_RTP,
  parameter int unsigned TRRD  = T_RRD,
  parameter int unsigned TCWD  = T_CWD,
  parameter int unsigned TBL   = T_BL,
  parameter int unsigned TWR   = T_WRITE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 issue,
  input  cmd_e                 issue_cmd,
  input  logic [BANK_W-1:0]    issue_bank,
  input  logic                 buf_only,
  input  cmd_e                 q_cmd,
  input  logic [BANK_W-1:0]    q_bank,
  output logic                 ok
);

  localparam int unsigned CW = 9;
  localparam int unsigned BI_W = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;

  logic [CW-1:0] rw_cnt [NUM_BANKS];
  logic [CW-1:0] pa_cnt [NUM_BANKS];
  logic [CW-1:0] rrd_cnt;
  logic [CW-1:0] ld_rw, ld_pa;

  always_comb begin
    unique case (issue_cmd)
      CMD_PREPARE:  begin ld_rw = CW'(TRP);  ld_pa = CW'(TRP);  end
      CMD_ACTIVATE: begin ld_rw = CW'(TRCD); ld_pa = CW'(TRAS); end
      CMD_READ:     begin ld_rw = CW'(TCCDR); ld_pa = CW'(TRTP); end
      CMD_WRITE:    begin
        ld_rw = buf_only ? CW'(TCWD + TBL) : CW'(TCWD + TBL + TWR);
        ld_pa = ld_rw;
      end
      default:      begin ld_rw = '0; ld_pa = '0; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        rw_cnt[b] <= '0;
        pa_cnt[b] <= '0;
      end
      rrd_cnt <= '0;
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (issue && BI_W'(issue_bank) == BI_W'(b)) begin
          rw_cnt[b] <= ld_rw - 1'b1;
          pa_cnt[b] <= ld_pa - 1'b1;
        end else begin
          if (rw_cnt[b] != 0) rw_cnt[b] <= rw_cnt[b] - 1'b1;
          if (pa_cnt[b] != 0) pa_cnt[b] <= pa_cnt[b] - 1'b1;
        end
      end
      if (issue)             rrd_cnt <= CW'(TRRD) - 1'b1;
      else if (rrd_cnt != 0) rrd_cnt <= rrd_cnt - 1'b1;
    end
  end

  always_comb begin
    logic [BI_W-1:0] qb;
    qb = BI_W'(q_bank);
    ok = (rrd_cnt == 0);
    if (q_cmd == CMD_READ || q_cmd == CMD_WRITE) ok = ok && rw_cnt[qb] == 0;
    else                                           ok = ok && pa_cnt[qb] == 0;
  end

endmodule
