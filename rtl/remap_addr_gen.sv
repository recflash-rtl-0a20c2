// remap_addr_gen: physical address of the vector at a given rank of the
// frequency-sorted list (access-frequency remapping with plane distribution).
//
// Vectors are packed into pages in rank order: rank r lands in page group
// g = r / slots_per_page at slot r % slots_per_page. Consecutive page groups
// go to consecutive planes (round robin), so the hottest pages are spread over
// all page buffers; the page inside the plane is base_page + g / PLANES.
// slots_per_page = PAGE_BYTES / (4 * 2^dim_log2), so all splits are shifts and
// masks. Combinational. Packing in rank order and spreading over planes follow
// the paper; the exact round-robin order is this implementation's choice,
// consistent with the first hot items of the paper's example (planes 0,0,1,1
// for two vectors per page).
module remap_addr_gen
  import recflash_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 16384
) (
  input  logic [KEY_W-1:0]  rank,
  input  logic [2:0]        dim_log2,   // log2(elements per vector), 4-byte elements
  input  logic [PAGE_W-1:0] base_page,
  output paddr_t            addr
);
  localparam int unsigned PB_LOG2 = $clog2(PAGE_BYTES);
  logic [4:0]        slot_bits;   // log2(slots per page)
  logic [KEY_W-1:0]  group;
  logic [KEY_W-1:0]  slot_mask;

  always_comb begin
    slot_bits  = 5'(PB_LOG2) - 5'(dim_log2) - 5'd2;
    group      = rank >> slot_bits;
    slot_mask  = (KEY_W'(1) << slot_bits) - KEY_W'(1);
    addr.slot  = SLOT_W'(rank & slot_mask);
    addr.plane = group[PLANE_W-1:0];
    addr.page  = base_page + PAGE_W'(group >> PLANE_W);
  end
endmodule
