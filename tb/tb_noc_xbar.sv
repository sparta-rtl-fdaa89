// tb_noc_xbar: 3 requesters and 4 partitions with random valid/ready timing.
// Every request carries a unique tag; each partition-side sink checks that
// what it receives was addressed to it and answers with a response carrying
// the tag back to the source named in the request. Checks: every request is
// delivered exactly once to the right partition with its payload intact,
// every response reaches the right requester exactly once, and contention
// for one partition occurs and is resolved.
module tb_noc_xbar;
  import sparta_pkg::*;
  localparam int NS = 3, ND = 4, PER_SRC = 300;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NS-1:0] rq_v, rq_r, rs_v, rs_r;
  mreq_t rq [NS];
  logic [PART_BITS-1:0] rq_d [NS];
  mresp_t rs [NS];
  logic [ND-1:0] o_v, o_r, i_v, i_r, conf;
  mreq_t o_q [ND];
  mresp_t i_s [ND];

  noc_xbar #(.N_SRC(NS), .N_DST(ND)) dut (
    .clk, .rst_n, .req_valid(rq_v), .req_ready(rq_r), .req(rq), .req_dst(rq_d),
    .rsp_valid(rs_v), .rsp_ready(rs_r), .rsp(rs),
    .out_valid(o_v), .out_ready(o_r), .out_req(o_q), .in_valid(i_v), .in_ready(i_r),
    .in_rsp(i_s), .stat_conflict(conf));

  int delivered [logic [63:0]];     // tag -> times delivered
  int returned  [logic [63:0]];
  mresp_t pend [ND][$];
  int n_conf = 0;

  function automatic logic [63:0] tag(int s, int k, int d);
    return {16'hCAFE, 8'(s), 8'(d), 32'(k)};
  endfunction

  // requesters
  for (genvar s = 0; s < NS; s++) begin : g_src
    initial begin
      rq_v[s] = 0; rq[s] = '0; rq_d[s] = '0; rs_r[s] = 0;
      wait (rst_n);
      for (int k = 0; k < PER_SRC; k++) begin
        int d;
        d = $urandom_range(0, ND - 1);
        @(negedge clk);
        rq_v[s] = 1; rq_d[s] = PART_BITS'(d);
        rq[s] = '0; rq[s].src = SRC_W'(s); rq[s].wdata = tag(s, k, d); rq[s].addr = VA_W'(k);
        do @(posedge clk); while (!rq_r[s]);
        @(negedge clk); rq_v[s] = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
    end
    always @(negedge clk) rs_r[s] = ($urandom_range(0, 3) != 0);
    always @(posedge clk) if (rs_v[s] && rs_r[s]) begin
      checks++;
      if (rs[s].src != SRC_W'(s) || rs[s].data[63:0] >> 40 != 64'(s) + (64'hCAFE << 8)) begin
        failures++; $display("FAIL response for %0d reached %0d", rs[s].data[47:40], s);
      end
      returned[rs[s].data[63:0]]++;
    end
  end

  // partition-side sinks
  for (genvar d = 0; d < ND; d++) begin : g_dst
    always @(negedge clk) o_r[d] = ($urandom_range(0, 2) != 0);
    always @(posedge clk) if (o_v[d] && o_r[d]) begin
      mresp_t x;
      checks++;
      if (o_q[d].wdata[39:32] != 8'(d)) begin
        failures++; $display("FAIL request for %0d delivered to %0d", o_q[d].wdata[39:32], d);
      end
      delivered[o_q[d].wdata]++;
      x = '0; x.src = o_q[d].src; x.data[63:0] = o_q[d].wdata;
      pend[d].push_back(x);
    end
    initial i_v[d] = 0;
    always @(negedge clk) begin
      i_v[d] = 0;
      if (pend[d].size() > 0 && $urandom_range(0, 1) == 1) begin i_v[d] = 1; i_s[d] = pend[d][0]; end
    end
  end
  // a response is consumed at the posedge where valid and ready are high
  always @(posedge clk)
    for (int d = 0; d < ND; d++)
      if (i_v[d] && i_r[d]) void'(pend[d].pop_front());

  always @(posedge clk) n_conf += $countones(conf);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (delivered.num() == NS * PER_SRC);
    repeat (200) @(negedge clk);
    for (int s = 0; s < NS; s++)
      for (int k = 0; k < PER_SRC; k++) begin
        checks++;
        // tag's destination field is unknown here; search all
        begin
          automatic int found = 0;
          for (int d = 0; d < ND; d++) if (delivered.exists(tag(s, k, d))) begin
            found += delivered[tag(s, k, d)];
            if (returned.exists(tag(s, k, d)) && returned[tag(s, k, d)] == 1) found += 10;
          end
          if (found != 11) begin failures++; $display("FAIL tag %0d/%0d: %0d", s, k, found); end
        end
      end
    checks++;
    if (n_conf == 0) begin failures++; $display("FAIL no contention seen"); end
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
