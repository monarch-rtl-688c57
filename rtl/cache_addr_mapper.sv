// cache_addr_mapper: coordinated RAM (data) and CAM (tag) locations of a
// cache-mode request.
//
// Physical address layout (low to high): 6 byte bits, superset field, vault
// field, then the address tag U. The data lives in RAM bank
//   dbank = ((U mod NUM_RAM_BANKS) + bank_off) mod NUM_RAM_BANKS
// of superset (ss_field + ss_off) mod NUM_SS; its 512 tags live in the same
// superset of a CAM bank. The bank number of the RAM address is split as
// {T-bank, key, T-set} = {dbank[4], dbank[3], dbank[2:0] + set_off}: T-bank
// picks one of the two CAM banks, key picks which 32-bit half of each 64-bit
// column holds the tag, T-set picks the set. The stored tag word is
// {dirty, valid, 30-bit tag} with the tag being U zero-extended.
// The field order (T-Bank, Key, T-Set, Vault, Superset) and the use of the
// bank ID to form the CAM address follow the paper's mapping figure; taking
// the bank as U mod NUM_RAM_BANKS (30 RAM banks is not a power of two) and
// where the offsets are added are this design's choices. Combinational; the
// controller registers the result, which costs the one cycle of remapping
// delay the paper accounts for.
module cache_addr_mapper
  import monarch_pkg::*;
#(
  parameter int unsigned NUM_RAM_BANKS = 30,
  parameter int unsigned NUM_SS        = 1
) (
  input  logic [PA_W-1:0]   addr,
  input  logic [7:0]        bank_off,
  input  logic [2:0]        set_off,
  input  logic [7:0]        ss_off,
  output logic [UTAG_W-1:0] utag,
  output logic [BANK_W-1:0] dbank,
  output logic [SS_W-1:0]   ss,
  output logic              tbank,
  output logic              key,
  output logic [SET_W-1:0]  tset
);

  logic [SS_W-1:0] ss_field;
  logic [31:0]     ldb, pdb;

  assign ss_field = addr[BOFF_W +: SS_W];
  assign utag     = addr[PA_W-1 -: UTAG_W];
  assign ldb      = 32'(utag) % NUM_RAM_BANKS;
  assign pdb      = (ldb + 32'(bank_off)) % NUM_RAM_BANKS;
  assign dbank    = BANK_W'(pdb);
  assign ss       = SS_W'((32'(ss_field) + 32'(ss_off)) % NUM_SS);
  assign tbank    = pdb[4];
  assign key      = pdb[3];
  assign tset     = pdb[2:0] + set_off;

endmodule
