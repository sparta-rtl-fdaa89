// tb_partition_hash: checks the accelerator-side partition hash against
// VPN mod N computed independently from random virtual addresses, for the
// 32-partition default and a 4-partition instance (the paper's worked
// example: virtual pages V3..V7 map to partitions 3, 0, 1, 2, 3).
module tb_partition_hash;
  import sparta_pkg::*;
  int checks = 0, failures = 0;
  logic [VA_W-1:0] va;
  logic [PART_BITS-1:0] p32, p4;

  partition_hash dut32 (.va(va), .part(p32));
  partition_hash #(.NUM_PARTS(4)) dut4 (.va(va), .part(p4));

  task automatic chk(logic [PART_BITS-1:0] got, int unsigned exp, string what);
    checks++;
    if (got != PART_BITS'(exp)) begin
      failures++;
      $display("FAIL %s va=%h got %0d exp %0d", what, va, got, exp);
    end
  endtask

  initial begin
    // the paper's example, 4 partitions
    for (int v = 3; v <= 7; v++) begin
      va = VA_W'(v) << 12 | VA_W'($urandom_range(0, 4095));
      #1;
      chk(p4, (v == 7 || v == 3) ? 3 : v - 4, "example");
    end
    for (int i = 0; i < 2000; i++) begin
      longint unsigned x;
      x  = {$urandom, $urandom};
      va = VA_W'(x);
      #1;
      chk(p32, int'((x >> 12) % 32), "mod32");
      chk(p4,  int'((x >> 12) % 4),  "mod4");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
