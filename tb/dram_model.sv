// dram_model: behavioural model (not synthesizable logic) of one memory
// partition: its memory controller and DRAM channel. It takes one request at
// a time and answers LAT cycles after accepting it. Reads return the 64-byte
// line holding the address; writes store one 64-bit word and return an
// acknowledgement. Words never written read as init_word(PART_ID, addr), so
// testbenches can predict every value without preloading memory.
module dram_model
  import sparta_pkg::*;
#(
  parameter int unsigned LAT     = 20,
  parameter int unsigned PART_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  dreq_t             req,
  output logic              resp_valid,
  output logic [LINE_W-1:0] resp_data
);
  logic [WORD_W-1:0] mem [logic [LPA_W-4:0]];   // sparse, word addressed
  int unsigned       cnt;
  logic              busy;
  dreq_t             cur;
  int unsigned       n_reads, n_writes;

  function automatic logic [WORD_W-1:0] init_word(int unsigned part, logic [LPA_W-1:0] a);
    return {8'hA5, 8'(part), 16'h5A5A, a[LPA_W-1:3], 3'b0};
  endfunction

  function automatic logic [WORD_W-1:0] rd_word(logic [LPA_W-1:0] a);
    logic [LPA_W-4:0] k;
    k = a[LPA_W-1:3];
    return mem.exists(k) ? mem[k] : init_word(PART_ID, {k, 3'b0});
  endfunction

  // backdoor write, for testbenches that preload tables
  function automatic void poke(logic [LPA_W-1:0] a, logic [WORD_W-1:0] d);
    mem[a[LPA_W-1:3]] = d;
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; resp_valid <= 1'b0; resp_data <= '0; cur <= '0;
      n_reads <= 0; n_writes <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1; cur <= req; cnt <= (LAT > 1) ? LAT - 1 : 0;
      end else if (busy) begin
        if (cnt > 1) cnt <= cnt - 1;
        else begin
          busy <= 1'b0;
          resp_valid <= 1'b1;
          if (cur.write) begin
            mem[cur.addr[LPA_W-1:3]] = cur.wdata;
            n_writes <= n_writes + 1;
            resp_data <= '0;
          end else begin
            for (int i = 0; i < LINE_WORDS; i++)
              resp_data[i*WORD_W +: WORD_W] <= rd_word({cur.addr[LPA_W-1:6], 3'(i), 3'b0});
            n_reads <= n_reads + 1;
          end
        end
      end
    end
  end
endmodule
