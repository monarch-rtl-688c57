// tb_cache_addr_mapper: random addresses and offsets against an independent
// computation of the RAM bank, superset and CAM bank/key/set fields.
module tb_cache_addr_mapper;
  import monarch_pkg::*;
  logic [PA_W-1:0] addr; logic [7:0] bank_off, ss_off; logic [2:0] set_off;
  logic [UTAG_W-1:0] utag; logic [BANK_W-1:0] dbank; logic [SS_W-1:0] ss; logic tbank, key; logic [2:0] tset;
  cache_addr_mapper #(.NUM_RAM_BANKS(30), .NUM_SS(256)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int k = 0; k < 2000; k++) begin
      automatic longint a = {$urandom, $urandom} & ((64'd1 << 35) - 1);
      automatic int u, pb;
      addr = PA_W'(a); bank_off = 8'($urandom % 30); ss_off = 8'($urandom); set_off = 3'($urandom);
      #1;
      u = int'(a >> 17);
      pb = (u % 30 + bank_off) % 30;
      checks++;
      if (utag != 18'(u) || dbank != 6'(pb) || ss != 8'(((a >> 6) & 255) + ss_off) ||
          tbank != pb[4] || key != pb[3] || tset != 3'(pb[2:0] + set_off)) begin
        failures++; $display("FAIL addr %h", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
