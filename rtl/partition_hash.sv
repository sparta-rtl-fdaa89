// partition_hash: the whole of SPARTA's accelerator-side translation for an
// accelerator with a virtual cache. It does not translate; it only names the
// memory partition that must hold the page, so the still-virtual request can
// be sent there. As in the paper's own example the hash is VPN mod NUM_PART,
// i.e. a subset of the address bits (VA[16:12] for 32 partitions of 4 KB
// pages). The operating system allocates every frame of a virtual page in
// the partition this function names, so the memory side can resolve it
// locally.
// Interface: va in, part out. Timing: purely combinational.
module partition_hash
  import sparta_pkg::*;
#(
  parameter int unsigned NUM_PARTS = sparta_pkg::NUM_PART  // power of two
) (
  input  logic [VA_W-1:0]      va,
  output logic [PART_BITS-1:0] part
);
  localparam int unsigned PB = $clog2(NUM_PARTS);

  logic [VPN_W-1:0] vpn;
  assign vpn = va[VA_W-1:PAGE_SHIFT];

  always_comb begin
    part = '0;
    if (PB > 0) part = PART_BITS'(vpn % VPN_W'(NUM_PARTS));
  end

  initial assert (NUM_PARTS >= 1 && NUM_PARTS <= (1 << PART_BITS) && (1 << PB) == NUM_PARTS)
    else $error("partition_hash: NUM_PARTS must be a power of two up to %0d", 1 << PART_BITS);
endmodule
