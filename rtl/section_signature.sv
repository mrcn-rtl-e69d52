// section_signature -- per-section Bloom-filter signatures of NMP accesses.
//
// While the near-memory core executes an offloaded task, every load and store
// it makes is recorded here, in the filter of the section (the stretch between
// two rollback points) it belongs to. Each section has a read filter and a
// write filter of SIG_BITS bits; an access sets SIG_HASHES bits chosen by
// mrcn_pkg::sig_hash of its 64-byte line address. The two filter arrays are
// the compressed signature that is sent to the CPU for validation, and are
// cleared when it is sent.
//
// Interface: ins_valid/ins_we/ins_addr/ins_sec record one access per cycle,
// visible on rd_sig/wr_sig from the next cycle. clear empties every filter
// in one cycle and takes priority over an insert in the same cycle.
//
// From the paper: a fixed-size Bloom-filter signature of the accessed
// addresses, and sections delimited by rollback points. This design's own
// choices: separate read and write filters per section (so the CPU can tell
// which section conflicts), filter size, hash functions and line granularity.
module section_signature
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC    = NUM_SEC_DEF,
  parameter int SIG_BITS   = SIG_BITS_DEF,
  parameter int SIG_HASHES = SIG_HASHES_DEF,
  localparam int SEC_W     = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1,
  localparam int IDX_W     = $clog2(SIG_BITS)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              ins_valid,
  input  logic                              ins_we,
  input  addr_t                             ins_addr,
  input  logic [SEC_W-1:0]                  ins_sec,
  input  logic                              clear,
  output logic [NUM_SEC-1:0][SIG_BITS-1:0]  rd_sig,
  output logic [NUM_SEC-1:0][SIG_BITS-1:0]  wr_sig
);

  logic [SIG_BITS-1:0] hash_bits;

  always_comb begin
    hash_bits = '0;
    for (int k = 0; k < SIG_HASHES; k++)
      hash_bits[IDX_W'(sig_hash(line_of(ins_addr), k, IDX_W))] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_sig <= '0;
      wr_sig <= '0;
    end else if (clear) begin
      rd_sig <= '0;
      wr_sig <= '0;
    end else if (ins_valid && (int'(ins_sec) < NUM_SEC)) begin
      if (ins_we) wr_sig[ins_sec] <= wr_sig[ins_sec] | hash_bits;
      else        rd_sig[ins_sec] <= rd_sig[ins_sec] | hash_bits;
    end
  end

endmodule
