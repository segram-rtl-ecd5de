// segram_pkg: types and constants shared by the SeGraM accelerator.
//
// Holds the record formats that travel between blocks: a minimizer as
// written by the minimizer finder (10 bytes), a seed location (8 bytes), a
// linearized subgraph character with its HopBits, the edit operations that
// traceback emits, and the per-accelerator configuration the host sets up
// (table base addresses in main memory, frequency threshold, error rate,
// edit threshold). The sizes of the minimizer (10 B) and seed (8 B) entries
// and the 2-bit base code A=00 C=01 G=10 T=11 follow the paper; the split of
// the records into fields and the address layout are this design's choice.
package segram_pkg;

  localparam int unsigned MEM_AW = 34;   // byte address into one HBM2E channel
  localparam int unsigned MEM_DW = 128;  // 16 bytes per read response
  localparam int unsigned HOP_LIMIT = 12;

  typedef logic [1:0] base_t;            // A=00 C=01 G=10 T=11

  typedef struct packed {
    logic [15:0] spare;
    logic [15:0] b;      // end of the minimizer in the read
    logic [15:0] a;      // start of the minimizer in the read
    logic [31:0] kmer;   // 2-bit packed k-mer, first base in the high bits
  } minimizer_t;         // 80 bits = 10 bytes

  typedef struct packed {
    logic [31:0] offset; // offset of the seed inside its node
    logic [31:0] node;   // node ID
  } seed_t;              // 64 bits = 8 bytes

  typedef struct packed {
    logic           last; // end-of-read marker bank
    logic [15:0]    b;
    logic [15:0]    a;
  } seed_meta_t;

  typedef struct packed {
    logic [HOP_LIMIT-1:0] hop;  // bit h-1 set: edge to the character h ahead
    base_t                base;
  } txt_entry_t;

  typedef enum logic [1:0] {
    OP_MATCH = 2'd0,
    OP_SUB   = 2'd1,
    OP_INS   = 2'd2,
    OP_DEL   = 2'd3
  } edit_op_e;

  typedef struct packed {
    logic [MEM_AW-1:0] l1_base;    // bucket table
    logic [MEM_AW-1:0] l2_base;    // minimizer table
    logic [MEM_AW-1:0] l3_base;    // seed location table
    logic [MEM_AW-1:0] node_base;  // node table
    logic [MEM_AW-1:0] char_base;  // character table
    logic [MEM_AW-1:0] edge_base;  // edge table
    logic [31:0]       ref_len;    // characters in the graph
    logic [15:0]       freq_thr;   // keep minimizers with count <= freq_thr
    logic [7:0]        err_q8;     // error rate E in 1/256 units
    logic [6:0]        edit_k;     // edit distance threshold per window
  } cfg_t;

endpackage
