// mem_tlb: the memory-side TLB of one SPARTA partition. It is shared by all
// accelerators that touch the partition and holds only translations whose
// frames lie in that partition, so it caches (asid, vpn_hi) -> local frame
// number, where vpn_hi is the virtual page number without the partition bits
// (those are implied by which partition received the request).
// Organisation: ENTRIES entries in WAYS-way sets (128 entries, 4 ways as in
// the paper's evaluation). The set index is the low bits of vpn_hi; the tag
// is {asid, remaining vpn_hi bits}. Replacement fills an invalid way first,
// otherwise a per-set round-robin pointer picks the victim. Index choice,
// tag contents, the address-space id and replacement are this design's own.
// Interface: a combinational lookup port (lk_* in, lk_hit/lk_lfn/lk_writable
// out) and a fill port written on the clock edge when fill_valid is high.
// A fill of a key already present overwrites that way. Reset clears all
// valid bits.
module mem_tlb
  import sparta_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned WAYS    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  logic [ASID_W-1:0] lk_asid,
  input  logic [VPNH_W-1:0] lk_vpn,
  output logic              lk_hit,
  output logic [LFN_W-1:0]  lk_lfn,
  output logic              lk_writable,
  // fill
  input  logic              fill_valid,
  input  logic [ASID_W-1:0] fill_asid,
  input  logic [VPNH_W-1:0] fill_vpn,
  input  logic [LFN_W-1:0]  fill_lfn,
  input  logic              fill_writable
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic              valid;
    logic [ASID_W-1:0] asid;
    logic [VPNH_W-1:0] vpn;     // full vpn_hi kept as tag (index bits included)
    logic [LFN_W-1:0]  lfn;
    logic              writable;
  } entry_t;

  entry_t           tlb [SETS][WAYS];
  logic [WAY_W-1:0] rr  [SETS];

  function automatic logic [IDX_W-1:0] set_of(logic [VPNH_W-1:0] v);
    return (SETS > 1) ? IDX_W'(v % VPNH_W'(SETS)) : '0;
  endfunction

  // lookup
  always_comb begin
    logic [IDX_W-1:0] s;
    s           = set_of(lk_vpn);
    lk_hit      = 1'b0;
    lk_lfn      = '0;
    lk_writable = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (tlb[s][w].valid && tlb[s][w].asid == lk_asid && tlb[s][w].vpn == lk_vpn) begin
        lk_hit      = 1'b1;
        lk_lfn      = tlb[s][w].lfn;
        lk_writable = tlb[s][w].writable;
      end
    end
  end

  // victim selection for a fill
  logic [IDX_W-1:0] fs;
  logic [WAY_W-1:0] victim;
  logic             use_rr;
  always_comb begin
    fs     = set_of(fill_vpn);
    victim = rr[fs];
    use_rr = 1'b1;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!tlb[fs][w].valid) begin victim = WAY_W'(w); use_rr = 1'b0; end
    for (int w = WAYS - 1; w >= 0; w--)
      if (tlb[fs][w].valid && tlb[fs][w].asid == fill_asid && tlb[fs][w].vpn == fill_vpn) begin
        victim = WAY_W'(w); use_rr = 1'b0;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) tlb[s][w] <= '0;
      end
    end else if (fill_valid) begin
      tlb[fs][victim] <= '{valid: 1'b1, asid: fill_asid, vpn: fill_vpn,
                           lfn: fill_lfn, writable: fill_writable};
      if (use_rr) rr[fs] <= (rr[fs] == WAY_W'(WAYS - 1)) ? '0 : rr[fs] + 1'b1;
    end
  end
endmodule
