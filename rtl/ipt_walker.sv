// ipt_walker: the page walker of one SPARTA partition. Each partition keeps
// its own inverted (hashed) page table in its own DRAM, covering only the
// frames of that partition, so a walk never leaves the partition. The table
// is sized with a 1/4 load factor and organised in buckets of eight 64-bit
// entries, one 64-byte line each, so a walk is exactly one memory read:
// bucket = ipt_hash(asid, vpn_hi), address = IPT_BASE + 64*bucket; the eight
// entries are compared in parallel against {valid, asid, vpn_hi}.
// Following the paper: a hashed/inverted table co-located with the data,
// one memory reference per walk, a valid bit per entry. This design's own:
// the bucket size, the hash, the entry layout and reporting a key missing
// from its bucket as a page fault (no overflow chain).
// Interface: start (one cycle, with asid/vpn) -> one mem_req (valid/ready) ->
// mem_resp_valid with the line -> done for one cycle with found/lfn/writable.
// Timing: done follows the memory response by one cycle; busy is high from
// start until done.
module ipt_walker
  import sparta_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ASID_W-1:0] asid,
  input  logic [VPNH_W-1:0] vpn,
  output logic              busy,
  output logic              done,
  output logic              found,
  output logic [LFN_W-1:0]  lfn,
  output logic              writable,
  // memory port (reads only)
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [LPA_W-1:0]  mem_req_addr,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_data
);
  typedef enum logic [1:0] {W_IDLE, W_REQ, W_WAIT, W_DONE} wstate_e;
  wstate_e           st;
  logic [ASID_W-1:0] k_asid;
  logic [VPNH_W-1:0] k_vpn;
  logic [LINE_W-1:0] line_q;

  assign busy          = (st != W_IDLE);
  assign mem_req_valid = (st == W_REQ);
  assign mem_req_addr  = IPT_BASE + LPA_W'({ipt_hash(k_asid, k_vpn), 6'b0});
  assign done          = (st == W_DONE);

  // parallel compare of the bucket's eight entries
  always_comb begin
    pte_t e;
    found    = 1'b0;
    lfn      = '0;
    writable = 1'b0;
    for (int i = 0; i < LINE_WORDS; i++) begin
      e = pte_t'(line_q[i*WORD_W +: WORD_W]);
      if (!found && e.valid && e.asid == k_asid && e.vpn_hi == k_vpn) begin
        found    = 1'b1;
        lfn      = e.lfn;
        writable = e.writable;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= W_IDLE;
      k_asid <= '0;
      k_vpn  <= '0;
      line_q <= '0;
    end else begin
      unique case (st)
        W_IDLE: if (start) begin k_asid <= asid; k_vpn <= vpn; st <= W_REQ; end
        W_REQ:  if (mem_req_ready) st <= W_WAIT;
        W_WAIT: if (mem_resp_valid) begin line_q <= mem_resp_data; st <= W_DONE; end
        W_DONE: st <= W_IDLE;
        default: st <= W_IDLE;
      endcase
    end
  end
endmodule
