// neuramem: NeuraMem accumulation unit (HACC instruction buffer, control unit,
// HE Hash-Engines with their HashPad slices, eviction path to memory).
//
// HACC instructions arrive from the unit's router port into an instruction
// buffer. The control unit decodes the head instruction (opcode HACC) and hands
// it to the hash engine chosen by the in-unit hash: engine =
// (TAG >> ENG_SHIFT) mod HE. The paper states that NeuraMem "employs another
// hash function" but does not give it; bits above ENG_SHIFT are used because
// the chip-level DRHM mapping fixes TAG mod N for all TAGs sent to one unit.
// Evicted hash-lines from all engines are merged by a round-robin arbiter into
// one write stream to the tile's memory controller (the "Eviction Routine" and
// "Address Generator" of the NeuraMem block diagram; the write address is the
// TAG itself). Instructions with another opcode are dropped and counted.
//
// Timing: one HACC per cycle leaves the buffer when its engine is ready;
// an instruction waiting on a full set (collision) blocks the buffer.
// The paper's NeuraMem has four router ports; this one has a single network
// port and a single memory port.
module neuramem
  import neurachip_pkg::*;
#(
  parameter int unsigned HE        = 4,
  parameter int unsigned LINES     = 2048,
  parameter int unsigned WAYS      = 4,
  parameter int unsigned ENG_SHIFT = 5,
  parameter int unsigned IBUF      = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  hacc_t   in_hacc,
  output logic    wr_valid,
  input  logic    wr_ready,
  output wr_req_t wr_data,
  output logic    empty,
  output logic [7:0] stat_evict,      // evictions this cycle (all engines)
  output logic [7:0] stat_collision,  // instructions parked this cycle
  output logic [7:0] stat_hit,        // merges into a hash-line this cycle
  output logic    stat_bad_op
);
  localparam int unsigned EB = (HE > 1) ? $clog2(HE) : 1;

  logic  q_valid, q_ready;
  hacc_t q_hacc;
  logic [$clog2(IBUF+1)-1:0] q_count;

  sync_fifo #(.W($bits(hacc_t)), .DEPTH(IBUF)) u_ibuf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_hacc),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_hacc),
    .count(q_count)
  );

  logic [EB-1:0] eng;
  logic          bad_op;
  logic [HE-1:0] e_ready, e_ev_valid, e_ev_ready, e_hit, e_evict, e_coll, e_empty;
  wr_req_t       e_ev_data [HE];

  assign eng    = EB'((q_hacc.tag >> ENG_SHIFT) % HE);
  assign bad_op = q_hacc.opcode != OP_HACC;
  assign q_ready = bad_op || e_ready[eng];
  assign stat_bad_op = q_valid && bad_op;

  for (genvar e = 0; e < HE; e++) begin : g_he
    hash_engine #(.LINES(LINES), .WAYS(WAYS), .SET_SHIFT(ENG_SHIFT + EB)) u_he (
      .clk, .rst_n,
      .in_valid(q_valid && !bad_op && (eng == EB'(e))),
      .in_ready(e_ready[e]),
      .in_hacc(q_hacc),
      .ev_valid(e_ev_valid[e]), .ev_ready(e_ev_ready[e]), .ev_data(e_ev_data[e]),
      .used_lines(), .empty(e_empty[e]),
      .stat_hit(e_hit[e]), .stat_insert(), .stat_evict(e_evict[e]),
      .stat_collision(e_coll[e])
    );
  end

  // Round-robin eviction arbiter.
  logic [EB-1:0] rr, gnt;
  logic          any;
  always_comb begin
    any = 1'b0;
    gnt = rr;
    for (int k = 0; k < HE; k++) begin
      int idx;
      idx = (int'(rr) + k) % HE;
      if (!any && e_ev_valid[idx]) begin
        any = 1'b1;
        gnt = EB'(idx);
      end
    end
  end
  assign wr_valid = any;
  assign wr_data  = e_ev_data[gnt];
  for (genvar e = 0; e < HE; e++) begin : g_evr
    assign e_ev_ready[e] = any && wr_ready && (gnt == EB'(e));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (wr_valid && wr_ready) rr <= EB'((int'(gnt) + 1) % HE);
  end

  assign empty          = (&e_empty) && (q_count == '0);
  assign stat_evict     = 8'($countones(e_evict));
  assign stat_collision = 8'($countones(e_coll));
  assign stat_hit       = 8'($countones(e_hit));
endmodule
