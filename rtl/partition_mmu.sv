// partition_mmu: the memory-side translation unit that sits next to one
// memory controller. Requests reach it after crossing the network with their
// virtual address (the partition was already chosen by partition_hash), so
// translation and the trip to memory overlap.
// A request is first steered by a virtual/physical multiplexer: physical
// requests (host, or legacy devices behind the IOMMU) go straight to DRAM.
// Virtual requests probe the partition's TLB (one cycle). On a hit the local
// DRAM access starts at once. On a miss the local walker reads the partition's
// own inverted page table (one DRAM read), fills the TLB, the TLB is probed
// again, and the data access follows - the sequence of the paper's TLB-miss
// timeline. The response carries the line, the local frame number used and a
// status; a missing PTE returns ST_PAGE_FAULT, a write to a read-only page
// ST_PROT_FAULT, and neither touches data memory.
// This design's own choices: one request in service at a time, a one-cycle
// TLB probe, and the status encoding.
// Interface: in_* valid/ready (mreq_t), out_* valid/ready (mresp_t),
// dram_req_* valid/ready (dreq_t) and dram_resp_valid/dram_resp_data (one
// response per request, always accepted). Timing: if memory raises
// dram_resp_valid D cycles after accepting a request, out_valid rises D+3
// clock edges after the request was accepted for a physical access, D+4 for
// a TLB hit (one extra edge for the probe) and 2D+9 for a TLB miss (walk,
// fill, second probe, data access).
// stat_* pulse for one cycle per TLB hit (first probe only), TLB miss (walk)
// and page fault.
module partition_mmu
  import sparta_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 128,
  parameter int unsigned TLB_WAYS    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  mreq_t             in_req,
  output logic              out_valid,
  input  logic              out_ready,
  output mresp_t            out_resp,
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output dreq_t             dram_req,
  input  logic              dram_resp_valid,
  input  logic [LINE_W-1:0] dram_resp_data,
  output logic              stat_tlb_hit,
  output logic              stat_tlb_miss,
  output logic              stat_fault
);
  typedef enum logic [2:0] {S_IDLE, S_PROBE, S_WALK, S_FILL, S_DREQ, S_DWAIT, S_RESP} state_e;
  state_e            st;
  mreq_t             rq;
  logic [LFN_W-1:0]  lfn_q;
  logic [LPA_W-1:0]  pa_q;
  mresp_t            resp_q;
  logic              reprobe;   // the current probe follows a fill

  logic [VPNH_W-1:0] rq_vpnh;
  assign rq_vpnh = rq.addr[VA_W-1:PAGE_SHIFT+PART_BITS];

  // TLB
  logic             tlb_hit, tlb_wr;
  logic [LFN_W-1:0] tlb_lfn;
  logic             w_start, w_busy, w_done, w_found, w_wr;
  logic [LFN_W-1:0] w_lfn;
  logic             w_mreq_valid;
  logic [LPA_W-1:0] w_mreq_addr;
  logic             w_wr_q;

  mem_tlb #(.ENTRIES(TLB_ENTRIES), .WAYS(TLB_WAYS)) u_tlb (
    .clk, .rst_n,
    .lk_asid(rq.asid), .lk_vpn(rq_vpnh),
    .lk_hit(tlb_hit), .lk_lfn(tlb_lfn), .lk_writable(tlb_wr),
    .fill_valid(st == S_FILL), .fill_asid(rq.asid), .fill_vpn(rq_vpnh),
    .fill_lfn(lfn_q), .fill_writable(w_wr_q)
  );

  // walker, sharing the DRAM port with data accesses
  assign w_start = (st == S_PROBE) && rq.is_virt && !tlb_hit;

  ipt_walker u_walk (
    .clk, .rst_n,
    .start(w_start), .asid(rq.asid), .vpn(rq_vpnh),
    .busy(w_busy), .done(w_done), .found(w_found), .lfn(w_lfn), .writable(w_wr),
    .mem_req_valid(w_mreq_valid), .mem_req_ready(dram_req_ready && st == S_WALK),
    .mem_req_addr(w_mreq_addr),
    .mem_resp_valid(dram_resp_valid && st == S_WALK), .mem_resp_data(dram_resp_data)
  );

  always_comb begin
    dram_req_valid = 1'b0;
    dram_req       = '0;
    if (st == S_WALK) begin
      dram_req_valid = w_mreq_valid;
      dram_req.addr  = w_mreq_addr;
    end else if (st == S_DREQ) begin
      dram_req_valid = 1'b1;
      dram_req.write = rq.write;
      dram_req.addr  = rq.write ? {pa_q[LPA_W-1:3], 3'b0} : {pa_q[LPA_W-1:6], 6'b0};
      dram_req.wdata = rq.wdata;
    end
  end

  assign in_ready  = (st == S_IDLE);
  assign out_valid = (st == S_RESP);
  assign out_resp  = resp_q;

  assign stat_tlb_hit  = (st == S_PROBE) && rq.is_virt && tlb_hit && !reprobe;
  assign stat_tlb_miss = w_start;
  assign stat_fault    = (st == S_WALK) && w_done && !w_found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      rq     <= '0;
      lfn_q  <= '0;
      w_wr_q <= 1'b0;
      pa_q   <= '0;
      resp_q <= '0;
      reprobe <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) begin
          rq <= in_req;
          reprobe <= 1'b0;
          resp_q <= '0;
          resp_q.src <= in_req.src;
          if (in_req.is_virt) st <= S_PROBE;
          else begin
            // virtual/physical multiplexer: physical requests bypass the TLB
            pa_q <= in_req.addr[LPA_W-1:0];
            resp_q.lfn <= in_req.addr[LPA_W-1:PAGE_SHIFT];
            st <= S_DREQ;
          end
        end
        S_PROBE: if (tlb_hit) begin
          resp_q.lfn <= tlb_lfn;
          pa_q <= {tlb_lfn, rq.addr[PAGE_SHIFT-1:0]};
          if (rq.write && !tlb_wr) begin
            resp_q.status <= ST_PROT_FAULT;
            st <= S_RESP;
          end else st <= S_DREQ;
        end else st <= S_WALK;
        S_WALK: if (w_done) begin
          if (w_found) begin
            lfn_q <= w_lfn; w_wr_q <= w_wr; st <= S_FILL;
          end else begin
            resp_q.status <= ST_PAGE_FAULT;
            st <= S_RESP;
          end
        end
        S_FILL: begin st <= S_PROBE; reprobe <= 1'b1; end      // TLB written this cycle, probed again next
        S_DREQ: if (dram_req_ready) st <= S_DWAIT;
        S_DWAIT: if (dram_resp_valid) begin
          if (!rq.write) resp_q.data <= dram_resp_data;
          st <= S_RESP;
        end
        S_RESP: if (out_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // handshake rules
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_resp));
  a_dreq_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  dram_req_valid && !dram_req_ready |=> dram_req_valid && $stable(dram_req));
  a_no_stray_resp: assert property (@(posedge clk) disable iff (!rst_n)
                                    dram_resp_valid |-> (st == S_DWAIT || (st == S_WALK && w_busy)));
endmodule
