// monarch_top: an in-package Monarch memory, NUM_VAULTS independent vaults,
// each a vault controller on the processor die driving its vault of the
// resistive 3D layers.
//
// Each vault has its own request port (mreq_t in, mresp_t out, valid/ready),
// its own operating mode (flat-RAM, flat-CAM or cache, sampled by the
// controller's state machine; change it only while the vault is idle and
// after reset) and its own port to the off-chip memory controller, which is
// outside this design. The processor side picks the vault (for cache mode
// from the address's vault field). Event pulses of every controller are
// brought out for statistics.
// The eight vaults follow the paper. The per-vault size is reduced from the
// paper's 32 banks x 256 supersets to NUM_BANKS x NUM_SS (defaults 8 x 1):
// a whole vault of bit-level crosspoint arrays exceeds the memory of the
// lint and elaboration tools; the RTL is fully parameterised.
module monarch_top
  import monarch_pkg::*;
#(
  parameter int unsigned NUM_VAULTS    = 8,
  parameter int unsigned NUM_BANKS     = 8,
  parameter int unsigned NUM_CAM_BANKS = 2,
  parameter int unsigned NUM_SS        = 1,
  parameter int unsigned MWW_M         = 3,
  parameter longint unsigned T_MWW_CYCLES = 64'd30272000000,
  parameter int unsigned WCNT_W        = 24,
  parameter int unsigned DC_LIMIT      = 8192,
  parameter int unsigned TWR           = T_WRITE
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  vault_mode_e [NUM_VAULTS-1:0]           mode,
  input  logic        [NUM_VAULTS-1:0]           req_valid,
  output logic        [NUM_VAULTS-1:0]           req_ready,
  input  mreq_t       [NUM_VAULTS-1:0]           req,
  output logic        [NUM_VAULTS-1:0]           resp_valid,
  output mresp_t      [NUM_VAULTS-1:0]           resp,
  output logic        [NUM_VAULTS-1:0]           mem_valid,
  input  logic        [NUM_VAULTS-1:0]           mem_ready,
  output logic        [NUM_VAULTS-1:0]           mem_we,
  output logic        [NUM_VAULTS-1:0][PA_W-1:0] mem_addr,
  output logic        [NUM_VAULTS-1:0][BLOCK_W-1:0] mem_wdata,
  input  logic        [NUM_VAULTS-1:0]           mem_rvalid,
  input  logic        [NUM_VAULTS-1:0][BLOCK_W-1:0] mem_rdata,
  output ctrl_events_t [NUM_VAULTS-1:0]          ev
);

  for (genvar v = 0; v < NUM_VAULTS; v++) begin : g_vault
    logic               st_valid, st_rvalid;
    stack_cmd_t         st_cmd;
    logic [BLOCK_W-1:0] st_wdata, st_rdata;

    vault_controller #(
      .NUM_BANKS(NUM_BANKS), .NUM_CAM_BANKS(NUM_CAM_BANKS), .NUM_SS(NUM_SS),
      .MWW_M(MWW_M), .T_MWW_CYCLES(T_MWW_CYCLES), .WCNT_W(WCNT_W),
      .DC_LIMIT(DC_LIMIT), .TWR(TWR)
    ) u_ctrl (
      .clk, .rst_n, .mode(mode[v]),
      .req_valid(req_valid[v]), .req_ready(req_ready[v]), .req(req[v]),
      .resp_valid(resp_valid[v]), .resp(resp[v]),
      .st_valid, .st_cmd, .st_wdata, .st_rvalid, .st_rdata,
      .mem_valid(mem_valid[v]), .mem_ready(mem_ready[v]), .mem_we(mem_we[v]),
      .mem_addr(mem_addr[v]), .mem_wdata(mem_wdata[v]),
      .mem_rvalid(mem_rvalid[v]), .mem_rdata(mem_rdata[v]),
      .ev(ev[v]), .vault_off()
    );

    vault_stack #(
      .NUM_BANKS(NUM_BANKS), .NUM_SS(NUM_SS), .STEP_CYCLES((TWR + 1) / 2)
    ) u_stack (
      .clk, .rst_n, .cmd_valid(st_valid), .cmd(st_cmd), .wdata(st_wdata),
      .rvalid(st_rvalid), .rdata(st_rdata), .bank_cam(), .bank_busy()
    );
  end

endmodule
