// tb_ipt_walker: the walker reads one bucket of the partition's inverted
// page table. A memory model inside the testbench builds buckets from a
// hash written out here independently of the design:
//   bucket = vpn_hi[18:0] ^ (asid << 11) ^ vpn_hi[30:19], line = 0xFE000000 + 64*bucket.
// Checks: exactly one memory read per walk at that address, the matching
// entry found in any of the 8 slots, ASID and valid bits respected, absent
// keys reported as not found, and done one cycle after the memory answer.
module tb_ipt_walker;
  import sparta_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, found, wr;
  logic [ASID_W-1:0] asid;
  logic [VPNH_W-1:0] vpn;
  logic [LFN_W-1:0] lfn;
  logic mreq_v, mreq_r, mrsp_v;
  logic [LPA_W-1:0] mreq_a;
  logic [LINE_W-1:0] mrsp_d;

  ipt_walker dut (.clk, .rst_n, .start, .asid, .vpn, .busy, .done, .found, .lfn,
                  .writable(wr), .mem_req_valid(mreq_v), .mem_req_ready(mreq_r),
                  .mem_req_addr(mreq_a), .mem_resp_valid(mrsp_v), .mem_resp_data(mrsp_d));

  logic [LINE_W-1:0] buckets [logic [31:0]];
  int n_mem;

  function automatic logic [31:0] bucket_addr(int unsigned a, longint unsigned v);
    logic [18:0] h;
    h = 19'(v) ^ 19'(a << 11) ^ 19'(v >> 19);
    return 32'hFE00_0000 + {h, 6'b0};
  endfunction

  function automatic logic [63:0] mk_pte(bit val, bit w, int unsigned a, longint unsigned v, int unsigned l);
    return {val, w, 8'(a), 31'(v), 3'b0, 20'(l)};
  endfunction

  task automatic put(int unsigned a, longint unsigned v, int slot, int unsigned l, bit w, bit val = 1);
    logic [31:0] ba;
    ba = bucket_addr(a, v);
    if (!buckets.exists(ba)) buckets[ba] = '0;
    buckets[ba][slot*64 +: 64] = mk_pte(val, w, a, v, l);
  endtask

  // an entry of another address space stored in this key's bucket
  task automatic put_foreign(int unsigned a, longint unsigned v, int slot, int unsigned other_a);
    logic [31:0] ba;
    ba = bucket_addr(a, v);
    if (!buckets.exists(ba)) buckets[ba] = '0;
    buckets[ba][slot*64 +: 64] = mk_pte(1, 1, other_a, v, 'h5);
  endtask

  // memory: accepts after a random delay, answers 5 cycles later
  initial begin
    mreq_r = 0; mrsp_v = 0; mrsp_d = '0; n_mem = 0;
    forever begin
      @(negedge clk);
      if (mreq_v) begin
        logic [31:0] a;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        mreq_r = 1; a = mreq_a;
        @(negedge clk);
        mreq_r = 0; n_mem++;
        repeat (4) @(negedge clk);
        mrsp_v = 1;
        mrsp_d = buckets.exists(a) ? buckets[a] : '0;
        @(negedge clk);
        mrsp_v = 0;
      end
    end
  end

  task automatic walk(int unsigned a, longint unsigned v, bit exp_found, int unsigned exp_lfn, bit exp_w);
    int m0, t;
    logic [31:0] exp_addr;
    exp_addr = bucket_addr(a, v);
    m0 = n_mem;
    @(negedge clk);
    start = 1; asid = ASID_W'(a); vpn = VPNH_W'(v);
    @(negedge clk);
    start = 0; asid = '0; vpn = '0;
    t = 0;
    while (!mreq_v) begin @(negedge clk); t++; end
    checks++;
    if (mreq_a != exp_addr) begin failures++; $display("FAIL addr %h exp %h", mreq_a, exp_addr); end
    while (!mrsp_v) @(negedge clk);
    @(posedge clk); #1;
    checks++;
    if (!done) begin failures++; $display("FAIL done not one cycle after response"); end
    checks++;
    if (found != exp_found || (exp_found && (lfn != LFN_W'(exp_lfn) || wr != exp_w))) begin
      failures++;
      $display("FAIL walk a=%0d v=%h found=%b lfn=%h w=%b exp %b %h %b", a, v, found, lfn, wr,
               exp_found, exp_lfn, exp_w);
    end
    @(posedge clk); #1;
    checks++;
    if (n_mem != m0 + 1 || busy) begin failures++; $display("FAIL %0d memory reads", n_mem - m0); end
  endtask

  initial begin
    start = 0; asid = 0; vpn = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // keys in various slots, including colliding keys in one bucket
    put(1, 'h12345, 0, 'h00042, 1);
    put(1, 'h12345 ^ (3 << 11), 5, 'h00099, 0);  // different key, same hash? different bucket
    put(2, 'h7fff_ffff, 7, 'hABCDE, 0);
    put(3, 'h1, 2, 'h1, 1, 0);                   // invalid entry
    for (int i = 0; i < 20; i++) put(4, 64'(i) << 19 | 64'(i), i % 8, 'h500 + i, i[0]);
    walk(1, 'h12345, 1, 'h42, 1);
    walk(1, 'h12345 ^ (3 << 11), 1, 'h99, 0);
    walk(2, 'h7fff_ffff, 1, 'hABCDE, 0);
    walk(2, 'h12345, 0, 0, 0);                   // wrong asid
    put_foreign(6, 'h4444, 3, 7);
    walk(6, 'h4444, 0, 0, 0);                    // same vpn, other asid, same bucket
    walk(3, 'h1, 0, 0, 0);                       // invalid bit
    walk(5, 'h2222, 0, 0, 0);                    // empty bucket
    for (int i = 12; i < 20; i++) walk(4, 64'(i) << 19 | 64'(i), 1, 'h500 + i, i[0]);
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
