// tb_partition_mmu: one memory-side translation unit in front of a
// behavioural DRAM partition (20-cycle access). The page table is written
// through the unit's own physical path, as the operating system would.
// Checks: physical requests bypass the TLB; a first virtual access walks the
// table (one table read), fills the TLB and fetches the data from the frame
// the PTE names; a second access hits; latencies follow the paper's timeline
// (hit: probe + one DRAM access; miss: probe + table read + probe + data
// read); writes land in the translated frame; writes to read-only pages and
// accesses to unmapped pages fault without touching data memory; stat pulses
// count hits, misses and faults; the response returns the frame number used.
module tb_partition_mmu;
  import sparta_pkg::*;
  localparam int LAT = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic in_valid, in_ready, out_valid, out_ready;
  mreq_t in_req;
  mresp_t out_resp;
  logic dreq_v, dreq_r, drsp_v;
  dreq_t dreq;
  logic [LINE_W-1:0] drsp_d;
  logic s_hit, s_miss, s_fault;
  int n_hit = 0, n_miss = 0, n_fault = 0;

  partition_mmu dut (.clk, .rst_n, .in_valid, .in_ready, .in_req, .out_valid, .out_ready,
                     .out_resp, .dram_req_valid(dreq_v), .dram_req_ready(dreq_r),
                     .dram_req(dreq), .dram_resp_valid(drsp_v), .dram_resp_data(drsp_d),
                     .stat_tlb_hit(s_hit), .stat_tlb_miss(s_miss), .stat_fault(s_fault));
  dram_model #(.LAT(LAT), .PART_ID(7)) mem (.clk, .rst_n, .req_valid(dreq_v), .req_ready(dreq_r),
                                            .req(dreq), .resp_valid(drsp_v), .resp_data(drsp_d));

  always @(posedge clk) if (rst_n) begin
    n_hit += int'(s_hit); n_miss += int'(s_miss); n_fault += int'(s_fault);
  end

  function automatic logic [63:0] word_at(logic [31:0] a);  // DRAM's initial contents
    return {8'hA5, 8'd7, 16'h5A5A, a[31:3], 3'b0};
  endfunction
  function automatic logic [31:0] bucket_addr(int unsigned asid, longint unsigned vh);
    logic [18:0] h;
    h = 19'(vh) ^ 19'(asid << 11) ^ 19'(vh >> 19);
    return 32'hFE00_0000 + {h, 6'b0};
  endfunction

  mresp_t r;
  int lat;

  task automatic xact(bit virt, bit wr, int unsigned asid, logic [47:0] addr, logic [63:0] wd);
    int t0;
    @(negedge clk);
    in_valid = 1;
    in_req = '{is_virt: virt, write: wr, asid: 8'(asid), addr: addr, wdata: wd, src: 4'd3};
    while (!in_ready) @(negedge clk);
    @(posedge clk); t0 = cyc;
    @(negedge clk); in_valid = 0;
    while (!out_valid) @(negedge clk);
    lat = cyc - t0;
    r = out_resp;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    out_ready = 1;
    @(negedge clk); out_ready = 0;
    checks++;
    if (r.src != 4'd3) begin failures++; $display("FAIL src"); end
  endtask

  task automatic expect_eq(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // page table: virtual pages (asid 1, vpn_hi 0x1000 + i) -> frame 0x300 + 5i
  function automatic logic [63:0] pte(int unsigned asid, longint unsigned vh, int unsigned lfn, bit w);
    return {1'b1, w, 8'(asid), 31'(vh), 3'b0, 20'(lfn)};
  endfunction
  function automatic logic [47:0] va_of(longint unsigned vh, int unsigned off);
    return 48'((vh << 17) | (64'd7 << 12) | 64'(off));   // partition bits = 7
  endfunction

  initial begin
    int rd0, wr0;
    in_valid = 0; in_req = '0; out_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // install PTEs through the physical path
    for (int i = 0; i < 4; i++) begin
      xact(0, 1, 0, 48'(bucket_addr(1, 'h1000 + i) + 32'(8 * i)), pte(1, 'h1000 + i, 'h300 + 5 * i, i != 3));
      expect_eq(64'(r.status), 64'(ST_OK), "pte write status");
    end
    // physical read bypasses the TLB
    xact(0, 0, 0, 48'h0012_3440, 0);
    expect_eq(r.data[0 +: 64], word_at(32'h0012_3440), "phys read word0");
    expect_eq(r.data[511 -: 64], word_at(32'h0012_3478), "phys read word7");
    expect_eq(64'(lat), 64'(LAT + 2), "phys read latency");
    expect_eq(64'(n_hit + n_miss), 0, "no TLB use by physical requests");
    // first virtual access: miss, walk, fill, re-probe, data
    rd0 = mem.n_reads;
    xact(1, 0, 1, va_of('h1002, 'h48), 0);
    expect_eq(64'(r.status), 64'(ST_OK), "miss status");
    expect_eq(r.data[64 +: 64], word_at({20'h30A, 12'h048}), "miss data word1");
    expect_eq(64'(r.lfn), 64'h30A, "miss returns PTE frame");
    expect_eq(64'(lat), 64'(2 * LAT + 7), "miss latency");
    expect_eq(64'(mem.n_reads - rd0), 2, "one table read + one data read");
    expect_eq(64'(n_miss), 1, "miss counted");
    // second access to the page: hit
    rd0 = mem.n_reads;
    xact(1, 0, 1, va_of('h1002, 'hFC0), 0);
    expect_eq(r.data[448 +: 64], word_at({20'h30A, 12'hFF8}), "hit data word7");
    expect_eq(64'(lat), 64'(LAT + 3), "hit latency");
    expect_eq(64'(mem.n_reads - rd0), 1, "hit: data read only");
    expect_eq(64'(n_hit), 1, "hit counted");
    // same vpn, other address space: page fault, no data access
    rd0 = mem.n_reads;
    xact(1, 0, 2, va_of('h1002, 0), 0);
    expect_eq(64'(r.status), 64'(ST_PAGE_FAULT), "other asid faults");
    expect_eq(64'(mem.n_reads - rd0), 1, "fault: table read only");
    // virtual write to a writable page, read back physically
    xact(1, 1, 1, va_of('h1001, 'h230), 64'hDEAD_BEEF_0123_4567);
    expect_eq(64'(r.status), 64'(ST_OK), "write status");
    xact(0, 0, 0, 48'({20'h305, 12'h200}), 0);
    expect_eq(r.data[6*64 +: 64], 64'hDEAD_BEEF_0123_4567, "write landed in frame");
    // write to the read-only page 0x1003: protection fault, memory untouched
    wr0 = mem.n_writes;
    xact(1, 0, 1, va_of('h1003, 0), 0);
    expect_eq(64'(r.status), 64'(ST_OK), "read of read-only page ok");
    xact(1, 1, 1, va_of('h1003, 8), 64'h1);
    expect_eq(64'(r.status), 64'(ST_PROT_FAULT), "write to read-only page");
    expect_eq(64'(mem.n_writes - wr0), 0, "no write on protection fault");
    // unmapped page
    xact(1, 0, 1, va_of('h7777, 0), 0);
    expect_eq(64'(r.status), 64'(ST_PAGE_FAULT), "unmapped page");
    expect_eq(64'(n_fault), 2, "faults counted");
    // all four pages now hit
    for (int i = 0; i < 3; i++) begin
      xact(1, 0, 1, va_of('h1000 + i, 0), 0);
      expect_eq(64'(r.lfn), 64'('h300 + 5 * i), "frame of page");
    end
    expect_eq(64'(n_miss), 6, "total walks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
