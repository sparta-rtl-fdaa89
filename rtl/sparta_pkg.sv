// sparta_pkg: widths, request/response formats and the page-table entry
// format shared by the SPARTA memory-side translation blocks.
//
// Address layout. The system holds 128 GB in 32 partitions of 4 GB, one per
// memory channel (8 sockets x 4 channels). A physical address is
// {partition[4:0], local_pa[31:0]}; partition p owns the contiguous range
// [p*4GB, (p+1)*4GB). Virtual addresses are 48 bits, pages are 4 KB.
// A virtual page may live in any frame of exactly one partition, chosen by
// the partition hash (VPN mod 32). The partition count, memory size and page
// size follow the paper's main configuration; the 48-bit virtual address,
// the 8-bit address-space id, the 64-byte line and the PTE layout are this
// design's own choices.
package sparta_pkg;

  localparam int VA_W       = 48;
  localparam int PAGE_SHIFT = 12;
  localparam int VPN_W      = VA_W - PAGE_SHIFT;      // 36
  localparam int NUM_PART   = 32;
  localparam int PART_BITS  = 5;                      // log2(NUM_PART)
  localparam int LPA_W      = 32;                     // 4 GB per partition
  localparam int PA_W       = PART_BITS + LPA_W;      // 37 bits = 128 GB
  localparam int LFN_W      = LPA_W - PAGE_SHIFT;     // 20: local frame number
  localparam int VPNH_W     = VPN_W - PART_BITS;      // 31: VPN without partition bits
  localparam int ASID_W     = 8;
  localparam int WORD_W     = 64;
  localparam int LINE_BYTES = 64;
  localparam int LINE_W     = LINE_BYTES * 8;         // 512
  localparam int LINE_WORDS = LINE_W / WORD_W;        // 8
  localparam int SRC_W      = 4;                      // requester id width

  // Response status returned with every memory-side response.
  typedef enum logic [1:0] {
    ST_OK         = 2'd0,
    ST_PAGE_FAULT = 2'd1,   // no valid PTE for (asid, vpn) in the partition's table
    ST_PROT_FAULT = 2'd2    // write to a page mapped read-only
  } status_e;

  // Request carried by the network to a partition. For a virtual request
  // addr is the virtual address; for a physical one its low PA_W bits are the
  // physical address. Reads return a whole line; writes store one 64-bit word.
  typedef struct packed {
    logic                is_virt;
    logic                write;
    logic [ASID_W-1:0]   asid;
    logic [VA_W-1:0]     addr;
    logic [WORD_W-1:0]   wdata;
    logic [SRC_W-1:0]    src;
  } mreq_t;

  // Response from a partition: the line (reads), the translation used
  // (partition-local frame number, returned so that an accelerator-side TLB
  // could be filled) and a status.
  typedef struct packed {
    status_e             status;
    logic [LFN_W-1:0]    lfn;
    logic [LINE_W-1:0]   data;
    logic [SRC_W-1:0]    src;
  } mresp_t;

  // Request from a partition to its memory controller (partition-local PA).
  // Reads fetch the 64-byte line containing addr; writes store the 64-bit
  // word at addr (8-byte aligned). Every request gets one response.
  typedef struct packed {
    logic                write;
    logic [LPA_W-1:0]    addr;
    logic [WORD_W-1:0]   wdata;
  } dreq_t;

  // Inverted page table entry, 64 bits, eight per 64-byte bucket.
  typedef struct packed {
    logic                valid;
    logic                writable;
    logic [ASID_W-1:0]   asid;
    logic [VPNH_W-1:0]   vpn_hi;
    logic [2:0]          rsvd;
    logic [LFN_W-1:0]    lfn;
  } pte_t;

  // Inverted page table placement and hash. With a 1/4 load factor the table
  // has 4 entries per 4 KB frame: 4 * 2^20 entries = 2^19 buckets of 8, 32 MB,
  // placed at the top of each partition.
  localparam int BUCKET_BITS = 19;
  localparam logic [LPA_W-1:0] IPT_BASE = 32'hFE00_0000;

  function automatic logic [BUCKET_BITS-1:0] ipt_hash(logic [ASID_W-1:0] asid,
                                                      logic [VPNH_W-1:0] vpn_hi);
    logic [BUCKET_BITS-1:0] h;
    h = vpn_hi[BUCKET_BITS-1:0] ^ {asid, 11'b0}
        ^ BUCKET_BITS'(vpn_hi[VPNH_W-1:BUCKET_BITS]);
    return h;
  endfunction

endpackage
