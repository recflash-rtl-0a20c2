// tb_remap_addr_gen: rank-to-address mapping with plane distribution.
// Reproduces the paper's example (two vectors per page, four planes: the
// first four hot items go to plane-page 0-0, 0-0, 1-0, 1-0) and checks random
// ranks against an independent divide/modulo formula for both vector sizes.
`include "tb_check.svh"
module tb_remap_addr_gen;
  import recflash_pkg::*;
  int checks = 0, failures = 0;
  key_t rank; logic [2:0] dim_log2; logic [PAGE_W-1:0] base_page; paddr_t addr, addr2;
  remap_addr_gen #(.PAGE_BYTES(16384)) dut (.*);
  remap_addr_gen #(.PAGE_BYTES(256)) dut2 (.rank, .dim_log2, .base_page, .addr(addr2));
  initial begin
    int spp, g;
    dim_log2 = 5; base_page = 0;   // 128-byte vectors, 2 per 256-byte page
    rank = 0; #1 `CHECK(addr2.plane == 0 && addr2.page == 0 && addr2.slot == 0, "rank0 0-0")
    rank = 1; #1 `CHECK(addr2.plane == 0 && addr2.page == 0 && addr2.slot == 1, "rank1 0-0")
    rank = 2; #1 `CHECK(addr2.plane == 1 && addr2.page == 0 && addr2.slot == 0, "rank2 1-0")
    rank = 3; #1 `CHECK(addr2.plane == 1 && addr2.page == 0, "rank3 1-0")
    rank = 8; #1 `CHECK(addr2.plane == 0 && addr2.page == 1, "rank8 0-1")
    for (int i = 0; i < 2000; i++) begin
      dim_log2 = (i % 2) ? 3'd5 : 3'd6;
      rank = key_t'($urandom); base_page = PAGE_W'($urandom % 4096);
      spp = 16384 / (4 << dim_log2);
      g = rank / spp;
      #1;
      `CHECK(addr.slot == SLOT_W'(rank % spp), "slot")
      `CHECK(addr.plane == PLANE_W'(g % 4), "plane")
      `CHECK(addr.page == PAGE_W'(base_page + g / 4), "page")
    end
    `FINISH
  end
endmodule
