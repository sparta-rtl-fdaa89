// tb_mem_tlb: drives fills and lookups into the default 128-entry 4-way
// memory-side TLB and compares against a reference kept in the testbench:
// hit/miss, returned frame and permission, address-space isolation,
// invalid-way-first filling, round-robin eviction in a full set, and
// overwriting of an existing key. Lookup is combinational.
module tb_mem_tlb;
  import sparta_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ASID_W-1:0] lk_asid, f_asid;
  logic [VPNH_W-1:0] lk_vpn, f_vpn;
  logic lk_hit, lk_wr, f_valid, f_wr;
  logic [LFN_W-1:0] lk_lfn, f_lfn;

  mem_tlb dut (.clk, .rst_n, .lk_asid, .lk_vpn, .lk_hit, .lk_lfn, .lk_writable(lk_wr),
               .fill_valid(f_valid), .fill_asid(f_asid), .fill_vpn(f_vpn),
               .fill_lfn(f_lfn), .fill_writable(f_wr));

  task automatic fill(int a, int v, int l, bit w);
    @(negedge clk);
    f_valid = 1; f_asid = ASID_W'(a); f_vpn = VPNH_W'(v); f_lfn = LFN_W'(l); f_wr = w;
    @(negedge clk);
    f_valid = 0;
  endtask

  task automatic look(int a, int v, bit exp_hit, int exp_lfn, bit exp_w);
    lk_asid = ASID_W'(a); lk_vpn = VPNH_W'(v);
    #1;
    checks++;
    if (lk_hit !== exp_hit || (exp_hit && (lk_lfn != LFN_W'(exp_lfn) || lk_wr != exp_w))) begin
      failures++;
      $display("FAIL lookup asid=%0d vpn=%0h: hit=%b lfn=%h w=%b exp %b %h %b",
               a, v, lk_hit, lk_lfn, lk_wr, exp_hit, exp_lfn, exp_w);
    end
  endtask

  initial begin
    f_valid = 0; f_asid = 0; f_vpn = 0; f_lfn = 0; f_wr = 0; lk_asid = 0; lk_vpn = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // empty after reset
    for (int i = 0; i < 64; i++) look(i % 4, i, 0, 0, 0);
    // fill all 128 entries: 32 sets x 4 ways, all must hit afterwards
    for (int i = 0; i < 128; i++) fill(1, i, 'h100 + i, i[0]);
    @(negedge clk);
    for (int i = 0; i < 128; i++) look(1, i, 1, 'h100 + i, i[0]);
    // same vpn, other address space: miss
    for (int i = 0; i < 16; i++) look(2, i, 0, 0, 0);
    // set 5 holds vpn 5,37,69,101 (fill order). Next fill evicts way 0 (vpn 5), then 37
    fill(1, 133, 'h777, 1);
    @(negedge clk);
    look(1, 133, 1, 'h777, 1);
    look(1, 5, 0, 0, 0);
    look(1, 37, 1, 'h100 + 37, 1);
    fill(1, 165, 'h778, 0);
    @(negedge clk);
    look(1, 37, 0, 0, 0);
    look(1, 69, 1, 'h100 + 69, 1);
    look(1, 165, 1, 'h778, 0);
    // refilling an existing key overwrites it in place (no eviction)
    fill(1, 69, 'h999, 0);
    @(negedge clk);
    look(1, 69, 1, 'h999, 0);
    look(1, 101, 1, 'h100 + 101, 1);
    look(1, 133, 1, 'h777, 1);
    // reset clears everything
    rst_n = 0; #1; rst_n = 1;
    look(1, 101, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
