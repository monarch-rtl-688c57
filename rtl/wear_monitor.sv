// wear_monitor: the X-Wear monitor of a cache-mode vault controller.
//
// Every XAM write reported by the command scheduler ('wr', with the vault-wide
// superset number 'ss_id' and 'dirty' when the write creates a dirty block)
// increments the write counter and looks up the superset write table (SWT),
// one W (written) and one D (dirty) flag per superset. The first write to a
// superset sets W and increments the superset counter; the first dirtying
// write sets D and increments the dirty counter. Three conditions raise
// 'rotate_req':
//   WR: the most significant set bit of the write counter is at least
//       WR_SHIFT (9) positions above that of the superset counter, i.e. the
//       average number of writes per written superset passed about 512;
//   WC: the write counter reached its limit (its top bit is set);
//   DC: the dirty counter reached DC_LIMIT (8192).
// The controller then flushes (it reads the SWT through swt_q_*) and pulses
// 'rotate_done': the SWT and all counters are cleared and the offsets step
// by their primes: bank +1, set +3, superset +7, and the vault offset +5 on
// every eighth rotation. Offsets wrap at the number of RAM banks, sets,
// supersets and vaults. All of this follows the paper. The write counter
// width (WCNT_W) and the wrap-around of the offsets are this design's choices.
module wear_monitor
  import monarch_pkg::*;
#(
  parameter int unsigned NUM_SSID  = 32,     // supersets tracked (banks x supersets)
  parameter int unsigned NUM_RAM_BANKS = 30,
  parameter int unsigned NUM_SS    = 1,      // supersets per bank
  parameter int unsigned WCNT_W    = 24,
  parameter int unsigned WR_SHIFT  = 9,
  parameter int unsigned DC_LIMIT  = 8192
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr,
  input  logic [$clog2(NUM_SSID)-1:0] ss_id,
  input  logic                        dirty,
  output logic                        rotate_req,
  input  logic                        rotate_done,
  input  logic [$clog2(NUM_SSID)-1:0] swt_q_id,
  output logic                        swt_q_w,
  output logic                        swt_q_d,
  output logic [7:0]                  bank_off,
  output logic [2:0]                  set_off,
  output logic [7:0]                  ss_off,
  output logic [2:0]                  vault_off,
  output logic                        wr_flag,   // WR, for observation
  output logic                        wc_flag,
  output logic                        dc_flag
);

  localparam int unsigned SC_W = $clog2(NUM_SSID) + 1;
  localparam int unsigned DC_W = $clog2(DC_LIMIT) + 1;

  logic [NUM_SSID-1:0] swt_w, swt_d;
  logic [WCNT_W-1:0]   wcnt;
  logic [SC_W-1:0]     scnt;
  logic [DC_W-1:0]     dcnt;
  logic [2:0]          vrot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      swt_w <= '0; swt_d <= '0;
      wcnt <= '0; scnt <= '0; dcnt <= '0;
      bank_off <= '0; set_off <= '0; ss_off <= '0; vault_off <= '0; vrot <= '0;
    end else if (rotate_done) begin
      swt_w <= '0; swt_d <= '0;
      wcnt <= '0; scnt <= '0; dcnt <= '0;
      bank_off <= 8'((32'(bank_off) + 1) % NUM_RAM_BANKS);
      set_off  <= set_off + 3'd3;
      ss_off   <= 8'((32'(ss_off) + 7) % NUM_SS);
      vrot     <= vrot + 1'b1;
      if (vrot == 3'd7) vault_off <= vault_off + 3'd5;
    end else if (wr) begin
      if (!wc_flag) wcnt <= wcnt + 1'b1;
      if (!swt_w[ss_id]) begin
        swt_w[ss_id] <= 1'b1;
        scnt <= scnt + 1'b1;
      end
      if (dirty && !swt_d[ss_id]) begin
        swt_d[ss_id] <= 1'b1;
        if (!dc_flag) dcnt <= dcnt + 1'b1;
      end
    end
  end

  logic [5:0] wmsb, smsb;
  assign wmsb = msb_pos1(32'(wcnt));
  assign smsb = msb_pos1(32'(scnt));

  assign wr_flag = (scnt != 0) && (32'(wmsb) >= 32'(smsb) + WR_SHIFT);
  assign wc_flag = wcnt[WCNT_W-1];
  assign dc_flag = 32'(dcnt) >= DC_LIMIT;
  assign rotate_req = wr_flag | wc_flag | dc_flag;

  assign swt_q_w = swt_w[swt_q_id];
  assign swt_q_d = swt_d[swt_q_id];

endmodule
