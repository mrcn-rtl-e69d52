// mrcn_pkg -- shared constants, types and the signature hash of the MRCN
// (Monitored Rollback Coherence for NMP) hardware.
//
// MRCN lets a near-memory core run an offloaded task speculatively, splits the
// task into sections at rollback points, and after the task asks the host CPU
// whether any CPU write hit a line the task touched. Only the sections from
// the first conflicting one onwards are re-executed.
//
// Defaults that come from the paper: 5 sections per task (its rollback-point
// figure shows C1..C5), an 8-cycle commit and a 40-50 cycle signature round
// trip. Address and data widths, the 64-byte line, the signature size and its
// hash are this design's choices.
package mrcn_pkg;

  localparam int ADDR_W   = 32;              // byte address
  localparam int DATA_W   = 64;              // store data word
  localparam int LINE_OFF = 6;               // 64-byte coherence granule
  localparam int LINE_W   = ADDR_W - LINE_OFF;
  localparam int PC_W     = 32;
  localparam int CTX_W    = 64;

  localparam int NUM_SEC_DEF    = 5;         // rollback points per task
  localparam int SIG_BITS_DEF   = 2048;      // bits per Bloom filter
  localparam int SIG_HASHES_DEF = 4;         // hash functions per filter
  localparam int WB_DEPTH_DEF   = 512;       // speculative store entries
  localparam int COMMIT_CYCLES_DEF = 8;      // T_commit
  localparam int HIST_DEPTH_DEF = 64;        // CPU write-record lines per bank
  localparam int CHECK_LANES_DEF = 8;        // record entries tested per cycle
  localparam int LINK_LAT_DEF   = 18;        // one-way link latency in cycles

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [DATA_W-1:0] data_t;

  // One speculative store as held in the write buffer and written at commit.
  typedef struct packed {
    logic  valid;
    addr_t addr;
    data_t data;
  } mem_wr_t;

  // Coherence report returned by the CPU for one signature.
  typedef struct packed {
    logic       ovf;       // CPU write record overflowed: whole-task rollback
    logic       conflict;  // some section must be re-executed
    logic [7:0] sec;       // first conflicting section (rollback point)
  } report_t;

  function automatic line_t line_of(input addr_t a);
    return a[ADDR_W-1:LINE_OFF];
  endfunction

  // Hash k of a line into a filter of 2**idx_w bits: rotate the line left
  // by 7*k bits, then XOR-fold it into idx_w bits.
  function automatic int unsigned sig_hash(input line_t line, input int k, input int idx_w);
    int unsigned h;
    int src;
    h = 0;
    for (int i = 0; i < LINE_W; i++) begin
      src = (i + LINE_W - ((7 * k) % LINE_W)) % LINE_W;
      if (line[src]) h = h ^ (32'd1 << (i % idx_w));
    end
    return h;
  endfunction

endpackage
