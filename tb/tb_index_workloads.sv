// tb_index_workloads: the index-traversal workloads used to evaluate SPARTA,
// scaled down, run as a multiprogrammed mix on the full default design.
// Four processes (address-space ids 1..4) each own one index structure:
//   1: internal binary search tree      2: external binary search tree
//   3: chained hash table               4: 4-level skip list
// Each structure has NODES nodes of one 64-byte line, scattered at random
// over a private heap of HEAP_PAGES pages, so together the heaps (32 MB)
// exceed the combined reach of the 32 memory-side TLBs (32 x 128 x 4 KB =
// 16 MB) and lookups miss in caches and TLBs the way pointer chasing does.
// Node words: 0 key, 1 value, 2..5 pointers (virtual addresses, 0 = null),
// 6 leaf flag. The page tables are built through the host port, the nodes
// are stored by the process's own two accelerators, and then the two
// accelerators of every process run lookups concurrently: each load is
// issued through the accelerator port, checked against a reference copy of
// memory, and each lookup's result against a reference answer computed
// without the hardware. Reported: memory-side TLB miss ratio and mean
// cycles per lookup.
module tb_index_workloads;
  import sparta_pkg::*;
  localparam int NA = 8, NP = 32, LAT = 20;
  localparam int HEAP_PAGES = 2048, NODES = 1024, LOOKUPS = 150, NBUCKETS = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

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

  // ---------------- reference memory (virtual, per process) ----------------
  logic [63:0] vmem [4][logic [47:0]];
  bit          used [4][logic [47:0]];

  function automatic logic [47:0] heap_base(int proc);
    return 48'(64'h10_0000 + 64'(proc) * 64'h1_0000) << 12;
  endfunction
  function automatic logic [47:0] new_node(int proc);
    logic [47:0] va;
    do va = heap_base(proc) + 48'({$urandom_range(0, HEAP_PAGES - 1), 6'($urandom), 6'b0});
    while (used[proc].exists(va));
    used[proc][va] = 1;
    for (int w = 0; w < 8; w++) vmem[proc][va + 48'(8 * w)] = 0;
    return va;
  endfunction
  function automatic void wr(int proc, logic [47:0] node, int w, logic [63:0] d);
    vmem[proc][node + 48'(8 * w)] = d;
  endfunction
  function automatic logic [63:0] rd(int proc, logic [47:0] node, int w);
    return vmem[proc][node + 48'(8 * w)];
  endfunction

  // ---------------- structures ----------------
  logic [63:0] keys [4][$];
  logic [63:0] answer [4][logic [63:0]];   // key -> value
  logic [47:0] root [4];

  function automatic logic [63:0] val_of(logic [63:0] k);
    return k ^ 64'h0123_4567_89AB_CDEF;
  endfunction

  // 1: internal BST, random insertion order
  function automatic void build_bst_int();
    for (int i = 0; i < NODES; i++) begin
      logic [63:0] k;
      logic [47:0] n, cur;
      k = {32'h0, $urandom} | 64'h1;
      if (answer[0].exists(k)) continue;
      answer[0][k] = val_of(k); keys[0].push_back(k);
      n = new_node(0); wr(0, n, 0, k); wr(0, n, 1, val_of(k));
      if (i == 0) begin root[0] = n; continue; end
      cur = root[0];
      forever begin
        int side;
        side = (k < rd(0, cur, 0)) ? 2 : 3;
        if (rd(0, cur, side) == 0) begin wr(0, cur, side, 64'(n)); break; end
        cur = 48'(rd(0, cur, side));
      end
    end
  endfunction

  // 2: external BST over sorted keys: leaves hold keys, inner nodes a split key
  function automatic logic [47:0] ext_build(ref logic [63:0] ks [$], input int lo, input int hi);
    logic [47:0] n;
    n = new_node(1);
    if (lo == hi) begin
      wr(1, n, 0, ks[lo]); wr(1, n, 1, val_of(ks[lo])); wr(1, n, 6, 1);
    end else begin
      int mid;
      mid = (lo + hi) / 2;
      wr(1, n, 0, ks[mid]);                 // keys <= split go left
      wr(1, n, 2, 64'(ext_build(ks, lo, mid)));
      wr(1, n, 3, 64'(ext_build(ks, mid + 1, hi)));
    end
    return n;
  endfunction
  function automatic void build_bst_ext();
    logic [63:0] ks [$];
    for (int i = 0; i < NODES / 2; i++) begin
      logic [63:0] k;
      k = {32'h0, $urandom} | 64'h1;
      if (answer[1].exists(k)) continue;
      answer[1][k] = val_of(k); keys[1].push_back(k); ks.push_back(k);
    end
    ks.sort();
    root[1] = ext_build(ks, 0, ks.size() - 1);
  endfunction

  // 3: hash table, NBUCKETS head pointers in a bucket array, chains
  function automatic void build_hash();
    root[2] = heap_base(2) + 48'(64'(HEAP_PAGES) << 12);   // bucket array after the heap
    for (int b = 0; b < NBUCKETS; b++) vmem[2][root[2] + 48'(8 * b)] = 0;
    for (int i = 0; i < NODES; i++) begin
      logic [63:0] k;
      logic [47:0] n, hd;
      k = {32'h0, $urandom} | 64'h1;
      if (answer[2].exists(k)) continue;
      answer[2][k] = val_of(k); keys[2].push_back(k);
      n = new_node(2); wr(2, n, 0, k); wr(2, n, 1, val_of(k));
      hd = root[2] + 48'(8 * (k % NBUCKETS));
      wr(2, n, 2, vmem[2][hd]);
      vmem[2][hd] = 64'(n);
    end
  endfunction

  // 4: skip list with 4 levels; head node has key 0
  function automatic void build_skip();
    logic [63:0] ks [$];
    logic [47:0] last [4];
    root[3] = new_node(3);
    for (int l = 0; l < 4; l++) last[l] = root[3];
    for (int i = 0; i < NODES; i++) begin
      logic [63:0] k;
      k = {32'h0, $urandom} | 64'h1;
      if (answer[3].exists(k)) continue;
      answer[3][k] = val_of(k); keys[3].push_back(k); ks.push_back(k);
    end
    ks.sort();
    foreach (ks[i]) begin
      logic [47:0] n;
      int lvl;
      n = new_node(3); wr(3, n, 0, ks[i]); wr(3, n, 1, val_of(ks[i]));
      lvl = 1;
      while (lvl < 4 && $urandom_range(0, 1) == 1) lvl++;
      for (int l = 0; l < lvl; l++) begin wr(3, last[l], 2 + l, 64'(n)); last[l] = n; end
    end
  endfunction

  // ---------------- host port / page tables ----------------
  int unsigned next_lfn [NP];
  int slots [logic [63:0]];
  task automatic host_wr(logic [PA_W-1:0] pa, logic [63:0] wd);
    @(negedge clk);
    h_v = 1; h_w = 1; h_pa = pa; h_wd = wd;
    do @(posedge clk); while (!h_r);
    @(negedge clk); h_v = 0; h_rr = 1;
    do @(posedge clk); while (!h_rv);
    @(negedge clk); h_rr = 0;
  endtask
  task automatic map_page(int unsigned asid, longint unsigned vpn);
    int unsigned p, lfn;
    logic [18:0] h;
    logic [63:0] bk;
    p = int'(vpn % NP);
    lfn = next_lfn[p]; next_lfn[p] += 7;
    h = 19'(vpn >> 5) ^ 19'(asid << 11) ^ 19'(vpn >> 24);
    bk = (64'(p) << 32) | 64'(h);
    if (!slots.exists(bk)) slots[bk] = 0;
    if (slots[bk] == 8) begin failures++; $display("FAIL setup: bucket full"); return; end
    host_wr({5'(p), 32'hFE00_0000 + {h, 6'b0} + 32'(8 * slots[bk])},
            {1'b1, 1'b1, 8'(asid), 31'(vpn >> 5), 3'b0, 20'(lfn)});
    slots[bk]++;
  endtask

  // ---------------- accelerator access ----------------
  logic [63:0] ld_val [NA];
  task automatic acc_op(int a, bit w, logic [47:0] va, logic [63:0] wd);
    @(negedge clk);
    a_v[a] = 1; a_w[a] = w; a_asid[a] = 8'(1 + a / 2); a_va[a] = va; a_wd[a] = wd;
    do @(posedge clk); while (!a_r[a]);
    @(negedge clk); a_v[a] = 0;
    while (!a_rv[a]) @(negedge clk);
    ld_val[a] = a_rd[a];
    checks++;
    if (a_st[a] != ST_OK) begin failures++; $display("FAIL acc%0d status %0d at %h", a, a_st[a], va); end
  endtask

  int n_loads [4], lk_cycles [4];

  task automatic load(int a, logic [47:0] va, output logic [63:0] d);
    int proc;
    proc = a / 2;
    acc_op(a, 0, va, 0);
    d = ld_val[a];
    n_loads[proc]++;
    checks++;
    if (d != vmem[proc][va]) begin
      failures++; $display("FAIL acc%0d load %h got %h exp %h", a, va, d, vmem[proc][va]);
    end
  endtask

  // lookups; return found flag and value
  task automatic lookup(int a, logic [63:0] k, output bit found, output logic [63:0] v);
    int proc;
    logic [47:0] n;
    logic [63:0] x, y;
    proc = a / 2; found = 0; v = 0;
    case (proc)
      0: begin
        n = root[0];
        while (n != 0) begin
          load(a, n, x);
          if (x == k) begin load(a, n + 8, v); found = 1; break; end
          load(a, n + 48'(x > k ? 16 : 24), y); n = 48'(y);
        end
      end
      1: begin
        n = root[1];
        forever begin
          load(a, n + 48, y);
          load(a, n, x);
          if (y == 1) begin
            if (x == k) begin load(a, n + 8, v); found = 1; end
            break;
          end
          load(a, n + 48'(k <= x ? 16 : 24), y); n = 48'(y);
        end
      end
      2: begin
        load(a, root[2] + 48'(8 * (k % NBUCKETS)), y); n = 48'(y);
        while (n != 0) begin
          load(a, n, x);
          if (x == k) begin load(a, n + 8, v); found = 1; break; end
          load(a, n + 16, y); n = 48'(y);
        end
      end
      default: begin
        n = root[3];
        for (int l = 3; l >= 0; l--) begin
          forever begin
            load(a, n + 48'(16 + 8 * l), y);
            if (y == 0) break;
            load(a, 48'(y), x);
            if (x > k) break;
            n = 48'(y);
            if (x == k) break;
          end
        end
        load(a, n, x);
        if (x == k && n != root[3]) begin load(a, n + 8, v); found = 1; end
      end
    endcase
  endtask

  task automatic run(int a);
    int proc;
    proc = a / 2;
    for (int i = 0; i < LOOKUPS; i++) begin
      logic [63:0] k, v;
      bit f;
      int t0;
      if ($urandom_range(0, 3) != 0) k = keys[proc][$urandom_range(0, keys[proc].size() - 1)];
      else k = {32'h0, $urandom} | 64'h1;
      t0 = cyc;
      lookup(a, k, f, v);
      lk_cycles[proc] += cyc - t0;
      checks++;
      if (f != answer[proc].exists(k) || (f && v != answer[proc][k])) begin
        failures++; $display("FAIL proc%0d lookup %h: found %b value %h", proc, k, f, v);
      end
    end
  endtask

  // store a process's words through its two accelerators
  task automatic store_all(int a);
    int proc, i;
    proc = a / 2; i = 0;
    foreach (vmem[proc][va]) begin
      if ((i++ % 2) == (a % 2)) acc_op(a, 1, va, vmem[proc][va]);
    end
  endtask

  int n_th = 0, n_tm = 0;
  always @(posedge clk) if (rst_n) begin n_th += $countones(s_th); n_tm += $countones(s_tm); end

  initial begin
    string nm [4] = '{"BST-internal", "BST-external", "hash table", "skip list"};
    int th0, tm0;
    a_v = 0; a_w = 0; h_v = 0; h_w = 0; h_pa = 0; h_wd = 0; h_rr = 0;
    for (int a = 0; a < NA; a++) begin a_asid[a] = 0; a_va[a] = 0; a_wd[a] = 0; end
    for (int p = 0; p < NP; p++) next_lfn[p] = 'h40 + p;
    for (int i = 0; i < 4; i++) begin n_loads[i] = 0; lk_cycles[i] = 0; end
    build_bst_int(); build_bst_ext(); build_hash(); build_skip();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int proc = 0; proc < 4; proc++) begin
      longint unsigned base;
      base = 64'(heap_base(proc)) >> 12;
      for (int pg = 0; pg < HEAP_PAGES + ((proc == 2) ? 1 : 0); pg++) map_page(1 + proc, base + 64'(pg));
    end
    fork
      store_all(0); store_all(1); store_all(2); store_all(3);
      store_all(4); store_all(5); store_all(6); store_all(7);
    join
    th0 = n_th; tm0 = n_tm;
    fork
      run(0); run(1); run(2); run(3); run(4); run(5); run(6); run(7);
    join
    for (int p = 0; p < 4; p++)
      $display("  %-13s %0d nodes, %0d loads, %0d cycles per lookup", nm[p], keys[p].size(),
               n_loads[p], lk_cycles[p] / (2 * LOOKUPS));
    $display("  memory-side TLB during lookups: %0d hits, %0d misses (%0d%% miss)",
             n_th - th0, n_tm - tm0, 100 * (n_tm - tm0) / (n_th - th0 + n_tm - tm0));
    checks++;
    if (n_tm - tm0 == 0) begin failures++; $display("FAIL no TLB misses: footprint too small"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
