// neurachip_pkg: types and constants shared by the NeuraChip blocks.
//
// The two instruction formats are 128 bits wide. Their field order and field
// widths follow the published MMH4 and HACC layouts (opcode first, then the
// register fields left to right). This implementation places the leftmost
// field in the most significant bits; the opcode encodings are its own choice.
//
//   MMH4: opcode[8] base[32] a_data[22] b_col_ind[22] b_data[22] roll_counter[22]
//   HACC: opcode[8] tag[32] data[32] rolling_counter[32] neuramem_id[8] unused[16]
//
// All addresses are 32-bit word addresses; DRAM is organised in 128-bit lines
// of four words (the width of the memory controller's data bus).
package neurachip_pkg;

  localparam int unsigned WORD_W   = 32;
  localparam int unsigned LINE_W   = 128;
  localparam int unsigned LINE_AW  = 30;   // line address = word address >> 2

  localparam logic [7:0] OP_MMH4 = 8'h01;
  localparam logic [7:0] OP_HACC = 8'h02;

  // Tag value that marks an unused product slot of an MMH4 block.
  localparam logic [31:0] TAG_NONE = 32'hFFFF_FFFF;

  // Operand words fetched for one MMH4, in the order of the operand array:
  // 4 A data, 16 tags, 4 B data, 16 rolling counters.
  localparam int unsigned OPS        = 40;
  localparam int unsigned OP_A       = 0;
  localparam int unsigned OP_TAG     = 4;
  localparam int unsigned OP_B       = 20;
  localparam int unsigned OP_CTR     = 24;

  typedef struct packed {
    logic [7:0]  opcode;
    logic [31:0] base;
    logic [21:0] a_data;
    logic [21:0] b_col_ind;
    logic [21:0] b_data;
    logic [21:0] roll_counter;
  } mmh4_t;

  typedef struct packed {
    logic [7:0]  opcode;
    logic [31:0] tag;
    logic [31:0] data;
    logic [31:0] counter;
    logic [7:0]  nm_id;
    logic [15:0] unused;
  } hacc_t;

  // Word read request from a NeuraCore to its tile's memory controller.
  // meta identifies {pipeline, register slot, operand index} inside the core.
  typedef struct packed {
    logic [31:0] addr;
    logic [10:0] meta;
  } rd_req_t;

  typedef struct packed {
    logic [31:0] data;
    logic [10:0] meta;
  } rd_resp_t;

  // Word write of an evicted hash-line (address = TAG).
  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] data;
  } wr_req_t;

  // Event counters of the whole chip (each counts occurrences since reset).
  typedef struct packed {
    logic [31:0] mmh4_issued;    // MMH4 instructions issued by the dispatcher
    logic [31:0] hacc_sent;      // HACC instructions leaving NeuraCores
    logic [31:0] hacc_merged;    // HACCs that hit an existing hash-line
    logic [31:0] evictions;      // hash-lines evicted (rolling eviction)
    logic [31:0] collision_cyc;  // HACCs parked on a full set (hash collision)
    logic [31:0] line_reads;     // DRAM line reads
    logic [31:0] coalesced;      // line reads that served several requests
    logic [31:0] bubble_cyc;     // router cycles held by the bubble rule
    logic [31:0] reseeds;        // DRHM reseed events
  } stats_t;

  // Lower-k-bit DRHM hash: ((TAG << k) >> k) * gamma mod n, in 32-bit
  // arithmetic where shifted-out bits are discarded.
  function automatic logic [31:0] drhm_hash(input logic [31:0] tag,
                                            input logic [31:0] gamma,
                                            input int unsigned k,
                                            input int unsigned n);
    logic [31:0] t;
    logic [31:0] p;
    t = (tag << k) >> k;
    p = t * gamma;
    return p % n;
  endfunction

endpackage
