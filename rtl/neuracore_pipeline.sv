// neuracore_pipeline: one of the NeuraCore's MMH4 pipelines.
//
// A pipeline owns a register file of REGS instruction slots, each tracked by a
// scoreboard bit, and one multiplier. An MMH4 instruction allocated to it is
// decoded into a free slot. Its operands are then requested word by word by
// the core's address generator: per Algorithm 1 of the paper the four A values
// (A_data + i), the four B values (B_data + j) and the 16 rolling counters
// (roll_counter + 4i + j); the 16 TAGs are read from B_col_ind + 4i + j (see
// below). Responses may return in any order and are written into the slot by
// operand index. When all OPS=40 words of a slot are present its scoreboard bit
// is set, and the multiplier walks the 16 (i, j) pairs of the lowest ready slot,
// producing HACC(TAG, A[i]*B[j], COUNTER) per pair, then frees the slot.
//
// Choices of this implementation:
//  * Algorithm 1 reads TAG from B_col_ind + j, which would give all four rows i
//    the same TAG; so that the four output rows stay distinct, the TAG block is
//    read as 16 words, B_col_ind + 4i + j, like the rolling counters.
//  * A TAG equal to TAG_NONE (all ones) marks a product the compiler left
//    unused (an MMH4 block with fewer than four rows or columns); it takes one
//    cycle and emits nothing ("up to 16 HACC instructions").
//  * Each slot stores its 40 fetched operand words next to the instruction.
//  * Products are 32-bit integer products (low 32 bits).
//
// Timing: allocation, response write and one multiplier step per cycle; a
// HACC leaves each cycle out_ready is high.
module neuracore_pipeline
  import neurachip_pkg::*;
#(
  parameter int unsigned REGS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // allocation of a decoded MMH4
  input  logic        alloc_valid,
  output logic        alloc_ready,
  input  mmh4_t       alloc_instr,
  // operand request towards the address generator
  output logic        req_valid,
  output logic [$clog2(REGS)-1:0] req_slot,
  output logic [5:0]  req_idx,
  output logic [31:0] req_addr,
  input  logic        req_fire,
  // operand response
  input  logic        resp_valid,
  input  logic [$clog2(REGS)-1:0] resp_slot,
  input  logic [5:0]  resp_idx,
  input  logic [31:0] resp_data,
  // partial products
  output logic        out_valid,
  input  logic        out_ready,
  output hacc_t       out_hacc,
  output logic [REGS-1:0] scoreboard,
  output logic [$clog2(REGS+1)-1:0] occupancy
);
  localparam int unsigned SB = $clog2(REGS);

  mmh4_t       instr   [REGS];
  logic [31:0] ops     [REGS][OPS];
  logic [REGS-1:0] valid;
  logic [5:0]  issued  [REGS];
  logic [5:0]  recv    [REGS];

  // ---- allocation: lowest free slot
  logic [SB-1:0] free_slot;
  logic          has_free;
  always_comb begin
    has_free = 1'b0;
    free_slot = '0;
    for (int s = REGS - 1; s >= 0; s--)
      if (!valid[s]) begin
        has_free = 1'b1;
        free_slot = SB'(s);
      end
  end
  assign alloc_ready = has_free;

  // ---- request generation: lowest slot with operands left to request
  logic [31:0] off;
  logic [21:0] fld;
  always_comb begin
    req_valid = 1'b0;
    req_slot = '0;
    for (int s = REGS - 1; s >= 0; s--)
      if (valid[s] && issued[s] != 6'(OPS)) begin
        req_valid = 1'b1;
        req_slot = SB'(s);
      end
    req_idx = issued[req_slot];
    if (req_idx < 6'(OP_TAG)) begin
      fld = instr[req_slot].a_data;       off = 32'(req_idx) - OP_A;
    end else if (req_idx < 6'(OP_B)) begin
      fld = instr[req_slot].b_col_ind;    off = 32'(req_idx) - OP_TAG;
    end else if (req_idx < 6'(OP_CTR)) begin
      fld = instr[req_slot].b_data;       off = 32'(req_idx) - OP_B;
    end else begin
      fld = instr[req_slot].roll_counter; off = 32'(req_idx) - OP_CTR;
    end
    req_addr = instr[req_slot].base + 32'(fld) + off;
  end

  // ---- scoreboard
  always_comb
    for (int s = 0; s < REGS; s++) scoreboard[s] = valid[s] && (recv[s] == 6'(OPS));

  always_comb begin
    occupancy = '0;
    for (int s = 0; s < REGS; s++) occupancy = occupancy + $bits(occupancy)'(valid[s]);
  end

  // ---- multiplier
  logic          busy;
  logic [SB-1:0] cur;
  logic [3:0]    k;
  logic [SB-1:0] rdy_slot;
  logic          any_rdy;
  always_comb begin
    any_rdy = 1'b0;
    rdy_slot = '0;
    for (int s = REGS - 1; s >= 0; s--)
      if (scoreboard[s]) begin
        any_rdy = 1'b1;
        rdy_slot = SB'(s);
      end
  end

  logic [31:0] p_tag, p_a, p_b, p_ctr;
  logic        p_skip, step;
  always_comb begin
    p_a   = ops[cur][OP_A + 32'(k[3:2])];
    p_b   = ops[cur][OP_B + 32'(k[1:0])];
    p_tag = ops[cur][OP_TAG + 32'(k)];
    p_ctr = ops[cur][OP_CTR + 32'(k)];
    p_skip = (p_tag == TAG_NONE);
    out_valid        = busy && !p_skip;
    out_hacc.opcode  = OP_HACC;
    out_hacc.tag     = p_tag;
    out_hacc.data    = p_a * p_b;
    out_hacc.counter = p_ctr;
    out_hacc.nm_id   = '0;   // filled in by the core's DRHM mapper
    out_hacc.unused  = '0;
  end
  assign step = busy && (p_skip || out_ready);

  wire do_alloc = alloc_valid && alloc_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      busy  <= 1'b0;
      cur   <= '0;
      k     <= '0;
      for (int s = 0; s < REGS; s++) begin
        issued[s] <= '0;
        recv[s]   <= '0;
      end
    end else begin
      if (req_fire) issued[req_slot] <= issued[req_slot] + 1'b1;
      if (resp_valid) recv[resp_slot] <= recv[resp_slot] + 1'b1;
      if (!busy) begin
        if (any_rdy) begin
          busy <= 1'b1;
          cur  <= rdy_slot;
          k    <= '0;
        end
      end else if (step) begin
        k <= k + 1'b1;
        if (k == 4'd15) begin
          busy <= 1'b0;
          valid[cur] <= 1'b0;
        end
      end
      if (do_alloc) begin
        valid[free_slot]  <= 1'b1;
        issued[free_slot] <= '0;
        recv[free_slot]   <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_alloc) instr[free_slot] <= alloc_instr;
    if (resp_valid) ops[resp_slot][resp_idx] <= resp_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) resp_valid |-> valid[resp_slot])
    else $error("neuracore_pipeline: response for an empty slot");
  assert property (@(posedge clk) disable iff (!rst_n) req_fire |-> req_valid);
endmodule
