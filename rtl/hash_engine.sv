// hash_engine: one NeuraMem Hash-Engine and its slice of the HashPad.
//
// The HashPad slice holds LINES hash-lines, each a TAG, a 32-bit DATA and a
// 32-bit COUNTER word (plus a valid bit). Following the paper's Hash-Engine
// walkthrough, the incoming TAG is compared with WAYS hash-lines at once by a
// comparator array; the matching line is selected by the DATA and COUNTER
// multiplexers, DATA is added to the instruction's DATA by a 32-bit adder and
// COUNTER is decremented by one, and both are written back. With no matching
// TAG the instruction is stored in an empty line of the set. When a COUNTER
// reaches zero the line is evicted (rolling eviction): the accumulated value
// is pushed to the eviction queue as a write of DATA to word address TAG, and
// the line is freed.
//
// Design choices of this implementation (the paper does not give them):
//  * The LINES lines are organised as LINES/WAYS sets of WAYS lines; the set
//    index is an XOR fold of TAG bits above SET_SHIFT. The comparator count
//    WAYS=4 matches "compared with 4 hash entries at a time".
//  * A newly inserted instruction whose COUNTER is already zero (an output
//    with a single partial product) is evicted at once without being stored.
//  * Hash collision routine: when the set is full and no TAG matches, the
//    instruction is parked in a small collision buffer of RETRY entries and
//    the engine goes on with the next instruction, so that the instructions
//    which complete (and evict) the lines of the full set can still get in.
//    When the collision buffer holds instructions, the engine alternates
//    between retrying its head and taking a new instruction; a retried
//    instruction that still collides goes to the back of the buffer. Only
//    when the buffer is full does a colliding instruction stall the input.
//    stat_collision pulses when an instruction is parked.
//  * DATA is accumulated as a 32-bit two's-complement integer.
//
// Timing: one HACC (new or retried) is looked up per cycle; the read-compare-add-write of the
// hash-line completes in the cycle of acceptance. An eviction is visible on
// ev_* one cycle later through a 2-entry queue.
module hash_engine
  import neurachip_pkg::*;
#(
  parameter int unsigned LINES     = 2048,
  parameter int unsigned WAYS      = 4,
  parameter int unsigned SET_SHIFT = 7,
  parameter int unsigned RETRY     = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  hacc_t   in_hacc,
  output logic    ev_valid,
  input  logic    ev_ready,
  output wr_req_t ev_data,
  output logic [$clog2(LINES+1)-1:0] used_lines,
  output logic    empty,
  output logic    stat_hit,
  output logic    stat_insert,
  output logic    stat_evict,
  output logic    stat_collision
);
  localparam int unsigned SETS = LINES / WAYS;
  localparam int unsigned SB   = $clog2(SETS);
  localparam int unsigned UW   = $clog2(LINES+1);

  logic [31:0]     tag_arr [WAYS][SETS];
  logic [31:0]     dat_arr [WAYS][SETS];
  logic [31:0]     ctr_arr [WAYS][SETS];
  logic [SETS-1:0] vld     [WAYS];

  // ---- collision buffer and source selection
  logic  rb_valid, rb_in_ready, rb_push, rb_pop, turn;
  hacc_t rb_head, cur, rb_in;
  logic [$clog2(RETRY+1)-1:0] rb_count;
  logic  sel_retry, cur_valid, collide;

  sync_fifo #(.W($bits(hacc_t)), .DEPTH(RETRY), .FULL_PASS(1'b1)) u_retry (
    .clk, .rst_n,
    .in_valid(rb_push), .in_ready(rb_in_ready), .in_data(rb_in),
    .out_valid(rb_valid), .out_ready(rb_pop), .out_data(rb_head), .count(rb_count)
  );

  // Room for a new parked instruction. New input is only parked when no retry
  // is popped in the same cycle, so the registered count is exact here (and
  // keeps the FIFO's pass-through ready out of this logic).
  logic rb_room;
  assign rb_room = (rb_count != ($bits(rb_count))'(RETRY));

  assign sel_retry = rb_valid && (turn || !in_valid);
  assign cur       = sel_retry ? rb_head : in_hacc;
  assign cur_valid = sel_retry || in_valid;

  logic [SB-1:0] set;
  logic [WAYS-1:0] match, free;
  logic hit, has_free;
  logic [$clog2(WAYS)-1:0] hit_way, free_way;
  logic [31:0] sel_data, sel_ctr, sum, dec;
  logic do_evict, accept, ev_push;
  logic ev_q_ready;
  wr_req_t ev_in;
  logic [UW-1:0] used;

  function automatic logic [SB-1:0] set_of(input logic [31:0] t);
    logic [31:0] s;
    s = (t >> SET_SHIFT) ^ (t >> (SET_SHIFT + SB));
    return s[SB-1:0];
  endfunction

  // Comparator array and free-line search.
  always_comb begin
    set = set_of(cur.tag);
    for (int w = 0; w < WAYS; w++) begin
      match[w] = vld[w][set] && (tag_arr[w][set] == cur.tag);
      free[w]  = !vld[w][set];
    end
    hit = |match;
    has_free = |free;
    hit_way = '0;
    free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (match[w]) hit_way = w[$clog2(WAYS)-1:0];
      if (free[w])  free_way = w[$clog2(WAYS)-1:0];
    end
    // DATA / COUNTER multiplexers, adder and decrementer.
    sel_data = dat_arr[hit_way][set];
    sel_ctr  = ctr_arr[hit_way][set];
    sum      = sel_data + cur.data;
    dec      = sel_ctr - 32'd1;
    do_evict = hit ? (dec == '0) : (has_free && (cur.counter == '0));
    collide  = !hit && !has_free;
    // accept: the looked-up instruction updates the HashPad this cycle
    accept   = cur_valid && !collide && (!do_evict || ev_q_ready);
    ev_push  = accept && do_evict;
    // a retried instruction leaves the buffer when accepted or rotates to its
    // back when it still collides; a new one is parked when it collides
    rb_pop   = sel_retry && (accept || collide);
    rb_push  = (sel_retry && collide) || (!sel_retry && in_valid && collide && rb_room);
    rb_in    = cur;
    in_ready = !sel_retry && ((!collide && (!do_evict || ev_q_ready)) || (collide && rb_room));
    ev_in.addr = cur.tag;
    ev_in.data = hit ? sum : cur.data;
  end

  assign stat_hit       = accept && hit;
  assign stat_insert    = accept && !hit;
  assign stat_evict     = ev_push;
  assert property (@(posedge clk) disable iff (!rst_n) rb_push |-> rb_in_ready)
    else $error("hash_engine: collision buffer overflow");
  assign stat_collision = !sel_retry && in_valid && collide && rb_room;
  assign used_lines     = used;
  assign empty          = (used == '0) && !rb_valid && !ev_valid;

  always_ff @(posedge clk) begin
    if (accept) begin
      if (hit) begin
        dat_arr[hit_way][set] <= sum;
        ctr_arr[hit_way][set] <= dec;
      end else if (!do_evict) begin
        tag_arr[free_way][set] <= cur.tag;
        dat_arr[free_way][set] <= cur.data;
        ctr_arr[free_way][set] <= cur.counter;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < WAYS; w++) vld[w] <= '0;
      used <= '0;
      turn <= 1'b0;
    end else begin
      if (rb_valid && in_valid) turn <= !turn;
      if (accept) begin
      if (hit && do_evict) begin
        vld[hit_way][set] <= 1'b0;
        used <= used - 1'b1;
      end else if (!hit && !do_evict) begin
        vld[free_way][set] <= 1'b1;
        used <= used + 1'b1;
      end
      end
    end
  end

  sync_fifo #(.W($bits(wr_req_t)), .DEPTH(2)) u_evq (
    .clk, .rst_n,
    .in_valid(ev_push), .in_ready(ev_q_ready), .in_data(ev_in),
    .out_valid(ev_valid), .out_ready(ev_ready), .out_data(ev_data),
    .count()
  );

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(match))
    else $error("hash_engine: TAG present in two hash-lines of a set");
endmodule
