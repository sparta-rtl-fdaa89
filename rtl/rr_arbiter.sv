// rr_arbiter: round-robin arbiter used by the network. Grants one of N
// requesters, searching from the one after the last accepted grant, so every
// requester that keeps asking is served within N grants.
// Interface: req[N] in, gnt_valid/gnt_idx out (combinational); advance high
// on a clock edge moves the priority pointer past gnt_idx.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N-1:0]                      req,
  input  logic                              advance,
  output logic                              gnt_valid,
  output logic [((N > 1) ? $clog2(N) : 1)-1:0] gnt_idx
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;

  always_comb begin
    int unsigned k;
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int unsigned i = 1; i <= N; i++) begin
      k = (int'(last) + i) % N;
      if (!gnt_valid && req[k]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(k);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last <= IW'(N - 1);
    else if (advance && gnt_valid) last <= gnt_idx;
endmodule
