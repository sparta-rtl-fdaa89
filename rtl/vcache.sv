// vcache: the accelerator's virtually-indexed, virtually-tagged data cache.
// With a virtual cache a SPARTA accelerator needs no translation hardware at
// all: hits are served by virtual address, and misses leave the accelerator
// still virtual, to be translated by the memory-side unit of the partition
// that holds the page. Size and associativity follow the paper's evaluation
// (16 KB, 4 ways). This design's own choices: 64-byte lines (64 sets),
// tags that include the address-space id (so different processes never hit
// on each other's lines), blocking operation, read allocate with an
// invalid-way-first / round-robin victim, and write-through stores with no
// write allocate (a store that hits also updates the cached word).
// Interface: core side req_valid/req_ready with {write, asid, va, wdata}
// (va 8-byte aligned) and resp_valid with {rdata, status} (no back-pressure,
// one response per request). Memory side mreq_* valid/ready (mreq_t, always
// virtual, src = SRC_ID) and mrsp_* valid/ready (mresp_t).
// Timing: a load hit answers one cycle after it is accepted; a miss answers
// one cycle after the memory response.
module vcache
  import sparta_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 16384,
  parameter int unsigned WAYS       = 4,
  parameter logic [SRC_W-1:0] SRC_ID = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  // accelerator core side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [ASID_W-1:0] req_asid,
  input  logic [VA_W-1:0]   req_va,
  input  logic [WORD_W-1:0] req_wdata,
  output logic              resp_valid,
  output logic [WORD_W-1:0] resp_rdata,
  output status_e           resp_status,
  // memory side (towards the network)
  output logic              mreq_valid,
  input  logic              mreq_ready,
  output mreq_t             mreq,
  input  logic              mrsp_valid,
  output logic              mrsp_ready,
  input  mresp_t            mrsp,
  // events
  output logic              stat_hit,
  output logic              stat_miss
);
  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W = VA_W - OFF_W - IDX_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic              valid;
    logic [ASID_W-1:0] asid;
    logic [TAG_W-1:0]  tag;
  } tag_t;

  tag_t              tags [SETS][WAYS];
  logic [LINE_W-1:0] data [SETS][WAYS];
  logic [WAY_W-1:0]  rr   [SETS];

  typedef enum logic [1:0] {C_IDLE, C_MREQ, C_MWAIT} cstate_e;
  cstate_e st;

  logic              q_write;
  logic [ASID_W-1:0] q_asid;
  logic [VA_W-1:0]   q_va;
  logic [WORD_W-1:0] q_wdata;

  function automatic logic [IDX_W-1:0] idx_of(logic [VA_W-1:0] va);
    return (SETS > 1) ? va[OFF_W +: IDX_W] : '0;
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [VA_W-1:0] va);
    return va[VA_W-1 -: TAG_W];
  endfunction

  // lookup of the incoming request (IDLE) or of the held one (miss)
  logic [VA_W-1:0]   lk_va;
  logic [ASID_W-1:0] lk_asid;
  logic              hit;
  logic [WAY_W-1:0]  hit_way;
  assign lk_va   = (st == C_IDLE) ? req_va   : q_va;
  assign lk_asid = (st == C_IDLE) ? req_asid : q_asid;
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (tags[idx_of(lk_va)][w].valid && tags[idx_of(lk_va)][w].asid == lk_asid &&
          tags[idx_of(lk_va)][w].tag == tag_of(lk_va)) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
  end

  logic [WAY_W-1:0] victim;
  logic             use_rr;
  always_comb begin
    victim = rr[idx_of(q_va)];
    use_rr = 1'b1;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!tags[idx_of(q_va)][w].valid) begin victim = WAY_W'(w); use_rr = 1'b0; end
  end

  logic [2:0] q_word, r_word;
  assign q_word = q_va[OFF_W-1:3];
  assign r_word = req_va[OFF_W-1:3];

  assign req_ready  = (st == C_IDLE);
  assign mreq_valid = (st == C_MREQ);
  always_comb begin
    mreq         = '0;
    mreq.is_virt = 1'b1;
    mreq.write   = q_write;
    mreq.asid    = q_asid;
    mreq.addr    = q_va;
    mreq.wdata   = q_wdata;
    mreq.src     = SRC_ID;
  end
  assign mrsp_ready = (st == C_MWAIT);

  // data array: written on a line fill, or on a store that hits
  always_ff @(posedge clk) begin
    if (st == C_MWAIT && mrsp_valid && mrsp.status == ST_OK) begin
      if (!q_write) data[idx_of(q_va)][victim] <= mrsp.data;
      else if (hit) data[idx_of(q_va)][hit_way][q_word*WORD_W +: WORD_W] <= q_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= C_IDLE;
      resp_valid  <= 1'b0;
      resp_rdata  <= '0;
      resp_status <= ST_OK;
      stat_hit    <= 1'b0;
      stat_miss   <= 1'b0;
      q_write <= 1'b0; q_asid <= '0; q_va <= '0; q_wdata <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) tags[s][w] <= '0;
      end
    end else begin
      resp_valid <= 1'b0;
      stat_hit   <= 1'b0;
      stat_miss  <= 1'b0;
      unique case (st)
        C_IDLE: if (req_valid) begin
          q_write <= req_write; q_asid <= req_asid; q_va <= req_va; q_wdata <= req_wdata;
          if (!req_write && hit) begin
            resp_valid  <= 1'b1;
            resp_rdata  <= data[idx_of(req_va)][hit_way][r_word*WORD_W +: WORD_W];
            resp_status <= ST_OK;
            stat_hit    <= 1'b1;
          end else begin
            stat_miss <= !req_write;
            st <= C_MREQ;
          end
        end
        C_MREQ: if (mreq_ready) st <= C_MWAIT;
        C_MWAIT: if (mrsp_valid) begin
          resp_valid  <= 1'b1;
          resp_status <= mrsp.status;
          resp_rdata  <= mrsp.data[q_word*WORD_W +: WORD_W];
          if (mrsp.status == ST_OK) begin
            if (!q_write) begin
              tags[idx_of(q_va)][victim] <= '{valid: 1'b1, asid: q_asid, tag: tag_of(q_va)};
              if (use_rr) rr[idx_of(q_va)] <= (rr[idx_of(q_va)] == WAY_W'(WAYS - 1)) ? '0
                                                : rr[idx_of(q_va)] + 1'b1;
            end
          end
          if (q_write) resp_rdata <= '0;
          st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
