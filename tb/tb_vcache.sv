// tb_vcache: the default 16 KB 4-way virtual cache against a memory model in
// the testbench that answers 6-15 cycles after a request. Line contents are
// a function of (asid, line address) unless written. Checks: load miss then
// hit, one-cycle hit latency, address-space isolation, round-robin
// eviction in a full set, write-through with no write allocate (including
// update of a line that hits), faults passed to the core without filling,
// and that every miss leaves as a virtual request tagged with SRC_ID.
module tb_vcache;
  import sparta_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic rq_v, rq_r, rq_w, rs_v, mq_v, mq_r, ms_v, ms_r, s_hit, s_miss;
  logic [7:0] rq_asid;
  logic [47:0] rq_va;
  logic [63:0] rq_wd, rs_d;
  status_e rs_st;
  mreq_t mq;
  mresp_t ms;

  vcache #(.SRC_ID(4'd5)) dut (.clk, .rst_n, .req_valid(rq_v), .req_ready(rq_r), .req_write(rq_w),
    .req_asid(rq_asid), .req_va(rq_va), .req_wdata(rq_wd), .resp_valid(rs_v), .resp_rdata(rs_d),
    .resp_status(rs_st), .mreq_valid(mq_v), .mreq_ready(mq_r), .mreq(mq), .mrsp_valid(ms_v),
    .mrsp_ready(ms_r), .mrsp(ms), .stat_hit(s_hit), .stat_miss(s_miss));

  logic [63:0] shadow [logic [63:0]];   // {asid, va word} -> value
  int n_mreq = 0, n_mwr = 0;

  function automatic logic [63:0] key(logic [7:0] a, logic [47:0] va);
    return {8'h0, a, va[47:3], 3'b0};
  endfunction
  function automatic logic [63:0] mem_word(logic [7:0] a, logic [47:0] va);
    logic [63:0] k;
    k = key(a, va);
    return shadow.exists(k) ? shadow[k] : {a, 8'h11, va[47:3], 3'b0};
  endfunction
  function automatic bit faults(logic [47:0] va);
    return va[40];
  endfunction

  // memory model
  initial begin
    mq_r = 0; ms_v = 0; ms = '0;
    forever begin
      @(negedge clk);
      if (mq_v) begin
        mreq_t q;
        mq_r = 1; q = mq;
        @(negedge clk); mq_r = 0; n_mreq++;
        checks++;
        if (!q.is_virt || q.src != 4'd5) begin failures++; $display("FAIL request not virtual/src"); end
        repeat ($urandom_range(5, 14)) @(negedge clk);
        ms = '0; ms.src = q.src;
        if (faults(q.addr)) ms.status = ST_PAGE_FAULT;
        else if (q.write) begin shadow[key(q.asid, q.addr)] = q.wdata; n_mwr++; end
        else for (int i = 0; i < 8; i++)
          ms.data[i*64 +: 64] = mem_word(q.asid, {q.addr[47:6], 3'(i), 3'b0});
        ms_v = 1;
        while (!ms_r) @(negedge clk);
        @(negedge clk); ms_v = 0;
      end
    end
  end

  logic [63:0] got;
  status_e gst;
  int lat, m_before;

  task automatic access(bit w, logic [7:0] a, logic [47:0] va, logic [63:0] wd);
    int t0;
    @(negedge clk);
    rq_v = 1; rq_w = w; rq_asid = a; rq_va = va; rq_wd = wd;
    while (!rq_r) @(negedge clk);
    @(posedge clk); t0 = cyc; m_before = n_mreq;
    @(negedge clk); rq_v = 0;
    while (!rs_v) @(negedge clk);
    lat = cyc - t0; got = rs_d; gst = rs_st;
  endtask

  task automatic ld(logic [7:0] a, logic [47:0] va, bit exp_hit);
    access(0, a, va, 0);
    checks++;
    if (gst != ST_OK || got != mem_word(a, va)) begin
      failures++; $display("FAIL load %h:%h got %h exp %h", a, va, got, mem_word(a, va));
    end
    checks++;
    if (exp_hit != (n_mreq == m_before) || (exp_hit && lat != 1)) begin
      failures++; $display("FAIL load %h:%h hit expected %b, lat %0d", a, va, exp_hit, lat);
    end
  endtask

  initial begin
    int wr0;
    rq_v = 0; rq_w = 0; rq_asid = 0; rq_va = 0; rq_wd = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    ld(1, 48'h1234_5678_9A40, 0);
    ld(1, 48'h1234_5678_9A48, 1);
    ld(1, 48'h1234_5678_9A78, 1);
    ld(2, 48'h1234_5678_9A40, 0);                 // other address space
    ld(2, 48'h1234_5678_9A40, 1);
    // set of va ...9A40 is index 0x29 (64 sets); four more lines fill it
    ld(1, 48'h0000_0000_0A40, 0);
    ld(1, 48'h0000_0001_0A40, 0);                 // set now full: 1:...9A40, 2:...9A40, 1:0A40, 1:10A40
    ld(1, 48'h0000_0002_0A40, 0);                 // evicts way 0 (asid1 ...9A40)
    ld(2, 48'h1234_5678_9A40, 1);
    ld(1, 48'h1234_5678_9A40, 0);                 // evicts way 1 (asid2 ...9A40)
    ld(2, 48'h1234_5678_9A40, 0);
    // store hit: written through and updated in the cache
    wr0 = n_mwr;
    access(1, 1, 48'h0000_0001_0A48, 64'hFEED_0000_0000_0001);
    checks++; if (gst != ST_OK || n_mwr != wr0 + 1) begin failures++; $display("FAIL store through"); end
    ld(1, 48'h0000_0001_0A48, 1);
    // store miss: no allocate
    access(1, 3, 48'h0000_0055_5000, 64'h77);
    ld(3, 48'h0000_0055_5000, 0);
    // faults are passed through and not cached
    access(0, 1, 48'h0100_0000_0000, 0);
    checks++; if (gst != ST_PAGE_FAULT) begin failures++; $display("FAIL fault not reported"); end
    access(0, 1, 48'h0100_0000_0000, 0);
    checks++; if (gst != ST_PAGE_FAULT || n_mreq != m_before + 1) begin failures++; $display("FAIL fault cached"); end
    // random traffic over a footprint larger than the cache
    for (int i = 0; i < 3000; i++) begin
      logic [47:0] va;
      va = {30'h0, 7'($urandom_range(0, 127)), 8'($urandom), 3'b0};
      if ($urandom_range(0, 4) == 0) access(1, 1, va, {$urandom, $urandom});
      else begin
        access(0, 1, va, 0);
        checks++;
        if (got != mem_word(1, va)) begin failures++; $display("FAIL random load %h", va); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
