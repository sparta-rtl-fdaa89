// tb_sparta_top: end-to-end test of the whole memory system at its default
// size (8 accelerators, 32 partitions, 128-entry TLBs, 16 KB caches), with
// a behavioural DRAM model on each of the 32 memory ports.
// 1. The "operating system" builds the mappings through the host's physical
//    port: four processes (address-space ids 1..4, two accelerators each),
//    each with 64 shared read-only pages and 64 private writable pages per
//    accelerator. Every page gets a frame in partition VPN mod 32 and a PTE
//    in that partition's inverted page table, written as plain 64-bit
//    physical stores.
// 2. All accelerators then run random loads and stores at once: loads of
//    shared pages (data sharing across accelerators of one process),
//    loads and stores of private pages, stores to read-only pages
//    (protection faults) and loads of unmapped pages (page faults).
//    Every response is compared with a reference memory kept here.
// 3. The host reads back, physically, words the accelerators stored.
// Each mechanism must occur at least once: cache hit and miss, memory-side
// TLB hit and miss (walk), page fault, protection fault, physical bypass,
// and network contention for one partition.
module tb_sparta_top;
  import sparta_pkg::*;
  localparam int NA = 8, NP = 32, LAT = 20, OPS = 400;
  localparam int SHARED = 64, PRIV = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NA-1:0] a_v, a_r, a_w, a_rv;
  logic [7:0] a_asid [NA];
  logic [47:0] a_va [NA];
  logic [63:0] a_wd [NA], a_rd [NA];
  status_e a_st [NA];
  logic h_v, h_r, h_w, h_rv, h_rr;
  logic [PA_W-1:0] h_pa;
  logic [63:0] h_wd;
  mresp_t h_rsp;
  logic [NP-1:0] d_v, d_r, d_rv;
  dreq_t d_q [NP];
  logic [LINE_W-1:0] d_rd [NP];
  logic [NA-1:0] s_vh, s_vm;
  logic [NP-1:0] s_th, s_tm, s_f, s_c;

  sparta_top dut (
    .clk, .rst_n,
    .acc_req_valid(a_v), .acc_req_ready(a_r), .acc_req_write(a_w), .acc_req_asid(a_asid),
    .acc_req_va(a_va), .acc_req_wdata(a_wd), .acc_resp_valid(a_rv), .acc_resp_rdata(a_rd),
    .acc_resp_status(a_st),
    .host_req_valid(h_v), .host_req_ready(h_r), .host_req_write(h_w), .host_req_pa(h_pa),
    .host_req_wdata(h_wd), .host_rsp_valid(h_rv), .host_rsp_ready(h_rr), .host_rsp(h_rsp),
    .dram_req_valid(d_v), .dram_req_ready(d_r), .dram_req(d_q), .dram_resp_valid(d_rv),
    .dram_resp_data(d_rd),
    .stat_vc_hit(s_vh), .stat_vc_miss(s_vm), .stat_tlb_hit(s_th), .stat_tlb_miss(s_tm),
    .stat_fault(s_f), .stat_conflict(s_c));

  for (genvar p = 0; p < NP; p++) begin : g_mem
    dram_model #(.LAT(LAT), .PART_ID(p)) u_mem (.clk, .rst_n, .req_valid(d_v[p]), .req_ready(d_r[p]),
      .req(d_q[p]), .resp_valid(d_rv[p]), .resp_data(d_rd[p]));
  end

  // ---------------- reference model ----------------
  typedef struct { int unsigned lfn; bit w; } map_t;
  map_t        pmap [logic [63:0]];       // {asid, vpn} -> frame
  logic [63:0] shadow [logic [63:0]];     // global PA word -> value
  int unsigned next_lfn [NP];
  int          slots [logic [63:0]];      // {part, bucket} -> entries used

  function automatic logic [63:0] mkey(int unsigned asid, longint unsigned vpn);
    return (64'(asid) << 40) | 64'(vpn);
  endfunction
  function automatic logic [PA_W-1:0] pa_of(int unsigned asid, logic [47:0] va);
    map_t m;
    m = pmap[mkey(asid, va >> 12)];
    return {5'(va >> 12), 20'(m.lfn), va[11:0]};
  endfunction
  function automatic logic [63:0] ref_word(logic [PA_W-1:0] pa);
    logic [63:0] k;
    k = 64'({pa[PA_W-1:3], 3'b0});
    if (shadow.exists(k)) return shadow[k];
    return {8'hA5, 8'(pa[36:32]), 16'h5A5A, pa[31:3], 3'b0};
  endfunction

  // ---------------- host port ----------------
  mresp_t hr;
  task automatic host(bit w, logic [PA_W-1:0] pa, logic [63:0] wd);
    @(negedge clk);
    h_v = 1; h_w = w; h_pa = pa; h_wd = wd;
    do @(posedge clk); while (!h_r);
    @(negedge clk); h_v = 0;
    h_rr = 1;
    do @(posedge clk); while (!h_rv);
    hr = h_rsp;
    @(negedge clk); h_rr = 0;
  endtask

  task automatic map_page(int unsigned asid, longint unsigned vpn, bit w);
    int unsigned p, lfn;
    logic [18:0] h;
    logic [63:0] bk;
    logic [31:0] addr;
    p = int'(vpn % NP);
    lfn = next_lfn[p]; next_lfn[p] += 3;          // frames spread within the partition
    h = 19'(vpn >> 5) ^ 19'(asid << 11) ^ 19'(vpn >> 24);
    bk = (64'(p) << 32) | 64'(h);
    if (!slots.exists(bk)) slots[bk] = 0;
    if (slots[bk] == 8) begin failures++; $display("FAIL setup: bucket full"); return; end
    addr = 32'hFE00_0000 + {h, 6'b0} + 32'(8 * slots[bk]);
    slots[bk]++;
    host(1, {5'(p), addr}, {1'b1, w, 8'(asid), 31'(vpn >> 5), 3'b0, 20'(lfn)});
    pmap[mkey(asid, vpn)] = '{lfn: lfn, w: w};
  endtask

  function automatic longint unsigned shared_vpn(int j);
    return 64'h4000 + 64'(j);
  endfunction
  function automatic longint unsigned priv_vpn(int a, int j);
    return 64'h8000 + 64'(a * 256 + j);
  endfunction

  // ---------------- event counters ----------------
  int n_vh = 0, n_vm = 0, n_th = 0, n_tm = 0, n_pf = 0, n_prot = 0, n_conf = 0, n_phys = 0;
  int n_done = 0;
  always @(posedge clk) if (rst_n) begin
    n_vh += $countones(s_vh); n_vm += $countones(s_vm);
    n_th += $countones(s_th); n_tm += $countones(s_tm);
    n_conf += $countones(s_c);
  end

  // ---------------- accelerators ----------------
  for (genvar a = 0; a < NA; a++) begin : g_acc
    initial begin
      a_v[a] = 0; a_w[a] = 0; a_asid[a] = 0; a_va[a] = 0; a_wd[a] = 0;
      wait (n_done == -1);
    end
    task automatic run();
      int unsigned asid;
      asid = 1 + a / 2;
      for (int k = 0; k < OPS; k++) begin
        int kind;
        longint unsigned vpn;
        logic [47:0] va;
        bit w, exp_fault, exp_prot;
        kind = $urandom_range(0, 99);
        w = 0; exp_fault = 0; exp_prot = 0;
        if (kind < 45)      vpn = shared_vpn($urandom_range(0, (kind < 25) ? 3 : SHARED - 1));
        else if (kind < 93) begin vpn = priv_vpn(a, $urandom_range(0, (kind < 70) ? 3 : PRIV - 1)); w = kind >= 80; end
        else if (kind < 96) begin vpn = shared_vpn($urandom_range(0, SHARED - 1)); w = 1; exp_prot = 1; end
        else begin vpn = 64'h9_0000 + 64'($urandom_range(0, 999)); exp_fault = 1; end
        va = {vpn[35:0], 9'($urandom_range(0, (kind < 25) ? 3 : 511)), 3'b0};
        @(negedge clk);
        a_v[a] = 1; a_w[a] = w; a_asid[a] = 8'(asid); a_va[a] = va; a_wd[a] = {$urandom, $urandom};
        do @(posedge clk); while (!a_r[a]);
        @(negedge clk); a_v[a] = 0;
        while (!a_rv[a]) @(negedge clk);
        checks++;
        if (exp_fault) begin
          n_pf += int'(a_st[a] == ST_PAGE_FAULT);
          if (a_st[a] != ST_PAGE_FAULT) begin failures++; $display("FAIL acc%0d: no page fault at %h", a, va); end
        end else if (exp_prot) begin
          n_prot += int'(a_st[a] == ST_PROT_FAULT);
          if (a_st[a] != ST_PROT_FAULT) begin failures++; $display("FAIL acc%0d: no protection fault at %h", a, va); end
        end else if (a_st[a] != ST_OK) begin
          failures++; $display("FAIL acc%0d: status %0d at %h", a, a_st[a], va);
        end else if (w) begin
          shadow[64'(pa_of(asid, va))] = a_wd[a];
        end else if (a_rd[a] != ref_word(pa_of(asid, va))) begin
          failures++;
          $display("FAIL acc%0d: load %h got %h exp %h", a, va, a_rd[a], ref_word(pa_of(asid, va)));
        end
      end
    endtask
  end

  initial begin
    h_v = 0; h_w = 0; h_pa = 0; h_wd = 0; h_rr = 0;
    for (int p = 0; p < NP; p++) next_lfn[p] = 'h100 + p;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. page tables
    for (int asid = 1; asid <= 4; asid++) begin
      for (int j = 0; j < SHARED; j++) map_page(asid, shared_vpn(j), 0);
      for (int a = 2 * (asid - 1); a < 2 * asid; a++)
        for (int j = 0; j < PRIV; j++) map_page(asid, priv_vpn(a, j), 1);
    end
    checks++;
    if (n_th + n_tm != 0) begin failures++; $display("FAIL setup used the TLB"); end
    // 2. all accelerators at once
    fork
      g_acc[0].run(); g_acc[1].run(); g_acc[2].run(); g_acc[3].run();
      g_acc[4].run(); g_acc[5].run(); g_acc[6].run(); g_acc[7].run();
    join
    // 3. physical read-back of stored words
    foreach (shadow[k]) begin
      if (n_phys >= 200) break;
      host(0, PA_W'(k), 0);
      n_phys++;
      checks++;
      if (hr.data[k[5:3]*64 +: 64] != shadow[k]) begin
        failures++; $display("FAIL host read %h got %h exp %h", k, hr.data[k[5:3]*64 +: 64], shadow[k]);
      end
    end
    // mechanisms
    begin
      string names [8] = '{"vcache hit", "vcache miss", "TLB hit", "TLB miss/walk", "page fault",
                           "protection fault", "physical bypass", "network contention"};
      int cnt [8];
      cnt = '{n_vh, n_vm, n_th, n_tm, n_pf, n_prot, n_phys, n_conf};
      for (int i = 0; i < 8; i++) begin
        $display("  %-20s %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
