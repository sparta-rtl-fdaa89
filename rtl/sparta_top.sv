// sparta_top: a SPARTA memory system. N_ACC accelerators, each with a 16 KB
// virtual cache and no TLB, send their cache misses - still virtual - across
// the network to the one memory partition that the partition hash (VPN mod
// 32) names. Next to each of the 32 memory controllers a partition_mmu
// translates with its own 128-entry TLB and, on a miss, walks the inverted
// page table kept in that same partition, then reads or writes the data
// locally. A host port carries physical-address traffic (CPU cores, legacy
// devices behind an IOMMU, and the operating system maintaining the page
// tables) into the same partitions; the partition units send it straight to
// memory.
// The accelerator cores, the memory controllers with their DRAM, the host
// and the IOMMU are outside this module: their signals are the ports below.
// Interface: per accelerator a load/store port (valid/ready request,
// response pulse); one host port (mreq_t/mresp_t, valid/ready, physical
// addresses {partition, local 32-bit address}); per partition a memory port
// (dreq_t valid/ready, response valid + 64-byte line). stat_* are one-cycle
// event pulses for monitoring.
// Partition count, memory size, TLB and cache sizes follow the paper's main
// configuration; the accelerator count (one per socket) is this design's own.
module sparta_top
  import sparta_pkg::*;
#(
  parameter int unsigned N_ACC         = 8,
  parameter int unsigned TLB_ENTRIES   = 128,
  parameter int unsigned TLB_WAYS      = 4,
  parameter int unsigned VCACHE_BYTES  = 16384,
  parameter int unsigned VCACHE_WAYS   = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // accelerator cores
  input  logic [N_ACC-1:0]    acc_req_valid,
  output logic [N_ACC-1:0]    acc_req_ready,
  input  logic [N_ACC-1:0]    acc_req_write,
  input  logic [ASID_W-1:0]   acc_req_asid   [N_ACC],
  input  logic [VA_W-1:0]     acc_req_va     [N_ACC],
  input  logic [WORD_W-1:0]   acc_req_wdata  [N_ACC],
  output logic [N_ACC-1:0]    acc_resp_valid,
  output logic [WORD_W-1:0]   acc_resp_rdata [N_ACC],
  output status_e             acc_resp_status[N_ACC],
  // host physical-address port
  input  logic                host_req_valid,
  output logic                host_req_ready,
  input  logic                host_req_write,
  input  logic [PA_W-1:0]     host_req_pa,
  input  logic [WORD_W-1:0]   host_req_wdata,
  output logic                host_rsp_valid,
  input  logic                host_rsp_ready,
  output mresp_t              host_rsp,
  // memory controllers, one per partition
  output logic [NUM_PART-1:0] dram_req_valid,
  input  logic [NUM_PART-1:0] dram_req_ready,
  output dreq_t               dram_req       [NUM_PART],
  input  logic [NUM_PART-1:0] dram_resp_valid,
  input  logic [LINE_W-1:0]   dram_resp_data [NUM_PART],
  // event pulses
  output logic [N_ACC-1:0]    stat_vc_hit,
  output logic [N_ACC-1:0]    stat_vc_miss,
  output logic [NUM_PART-1:0] stat_tlb_hit,
  output logic [NUM_PART-1:0] stat_tlb_miss,
  output logic [NUM_PART-1:0] stat_fault,
  output logic [NUM_PART-1:0] stat_conflict
);
  localparam int unsigned N_SRC = N_ACC + 1;    // accelerators, then the host
  initial assert (N_SRC <= (1 << SRC_W)) else $error("sparta_top: too many requesters");

  logic [N_SRC-1:0]     s_req_valid, s_req_ready, s_rsp_valid, s_rsp_ready;
  mreq_t                s_req [N_SRC];
  logic [PART_BITS-1:0] s_dst [N_SRC];
  mresp_t               s_rsp [N_SRC];

  logic [NUM_PART-1:0]  p_req_valid, p_req_ready, p_rsp_valid, p_rsp_ready;
  mreq_t                p_req [NUM_PART];
  mresp_t               p_rsp [NUM_PART];

  // accelerators: virtual cache, then the partition hash on the miss path
  for (genvar a = 0; a < N_ACC; a++) begin : g_acc
    vcache #(.SIZE_BYTES(VCACHE_BYTES), .WAYS(VCACHE_WAYS), .SRC_ID(SRC_W'(a))) u_vc (
      .clk, .rst_n,
      .req_valid(acc_req_valid[a]), .req_ready(acc_req_ready[a]),
      .req_write(acc_req_write[a]), .req_asid(acc_req_asid[a]),
      .req_va(acc_req_va[a]), .req_wdata(acc_req_wdata[a]),
      .resp_valid(acc_resp_valid[a]), .resp_rdata(acc_resp_rdata[a]),
      .resp_status(acc_resp_status[a]),
      .mreq_valid(s_req_valid[a]), .mreq_ready(s_req_ready[a]), .mreq(s_req[a]),
      .mrsp_valid(s_rsp_valid[a]), .mrsp_ready(s_rsp_ready[a]), .mrsp(s_rsp[a]),
      .stat_hit(stat_vc_hit[a]), .stat_miss(stat_vc_miss[a])
    );
    partition_hash #(.NUM_PARTS(NUM_PART)) u_hash (.va(s_req[a].addr), .part(s_dst[a]));
  end

  // host: physical requests, routed by the partition field of the address
  always_comb begin
    s_req[N_ACC]         = '0;
    s_req[N_ACC].is_virt = 1'b0;
    s_req[N_ACC].write   = host_req_write;
    s_req[N_ACC].addr    = VA_W'(host_req_pa);
    s_req[N_ACC].wdata   = host_req_wdata;
    s_req[N_ACC].src     = SRC_W'(N_ACC);
  end
  assign s_dst[N_ACC]       = host_req_pa[PA_W-1:LPA_W];
  assign s_req_valid[N_ACC] = host_req_valid;
  assign host_req_ready     = s_req_ready[N_ACC];
  assign host_rsp_valid     = s_rsp_valid[N_ACC];
  assign host_rsp           = s_rsp[N_ACC];
  assign s_rsp_ready[N_ACC] = host_rsp_ready;

  noc_xbar #(.N_SRC(N_SRC), .N_DST(NUM_PART)) u_noc (
    .clk, .rst_n,
    .req_valid(s_req_valid), .req_ready(s_req_ready), .req(s_req), .req_dst(s_dst),
    .rsp_valid(s_rsp_valid), .rsp_ready(s_rsp_ready), .rsp(s_rsp),
    .out_valid(p_req_valid), .out_ready(p_req_ready), .out_req(p_req),
    .in_valid(p_rsp_valid), .in_ready(p_rsp_ready), .in_rsp(p_rsp),
    .stat_conflict(stat_conflict)
  );

  for (genvar p = 0; p < NUM_PART; p++) begin : g_part
    partition_mmu #(.TLB_ENTRIES(TLB_ENTRIES), .TLB_WAYS(TLB_WAYS)) u_mmu (
      .clk, .rst_n,
      .in_valid(p_req_valid[p]), .in_ready(p_req_ready[p]), .in_req(p_req[p]),
      .out_valid(p_rsp_valid[p]), .out_ready(p_rsp_ready[p]), .out_resp(p_rsp[p]),
      .dram_req_valid(dram_req_valid[p]), .dram_req_ready(dram_req_ready[p]),
      .dram_req(dram_req[p]),
      .dram_resp_valid(dram_resp_valid[p]), .dram_resp_data(dram_resp_data[p]),
      .stat_tlb_hit(stat_tlb_hit[p]), .stat_tlb_miss(stat_tlb_miss[p]),
      .stat_fault(stat_fault[p])
    );
  end
endmodule
