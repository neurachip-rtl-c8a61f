// torus_router: on-chip router of the NeuraChip 2D torus.
//
// Carries HACC packets from the NeuraCores to the NeuraMem selected by the
// packet's NeuraMem ID. Five ports: 0 local, 1 +X, 2 -X, 3 +Y, 4 -Y. Every
// input has a packet buffer of BUF entries (the paper's router packet
// buffers). The head packet of each input is routed dimension-order (X first,
// then Y), taking the shorter way round each ring; a packet at its destination
// router leaves on the local port. Each output has a round-robin switch
// arbiter; one packet per output and per input moves per cycle.
//
// The destination router of NeuraMem m is x = 2*(m mod MPT) + 1,
// y = m / MPT: each tile is one row of the torus in which NeuraCores (even x)
// and NeuraMems (odd x) alternate, as in the interleaved layout of the paper's
// tile figure.
//
// Deadlock freedom on the rings uses bubble flow control (an own choice; the
// paper does not describe its flow control): a packet continuing along a ring
// needs one free slot downstream, a packet entering a ring (from the local
// port or turning from X to Y) needs two. Downstream occupancy arrives as a
// free-slot count (out_free) from the neighbour's buffers, taken from
// registers, so there is no combinational path between routers.
// stat_bubble pulses when a packet is held back only by the bubble rule.
module torus_router
  import neurachip_pkg::*;
#(
  parameter int unsigned X   = 0,
  parameter int unsigned Y   = 0,
  parameter int unsigned NX  = 8,
  parameter int unsigned NY  = 8,
  parameter int unsigned MPT = 4,
  parameter int unsigned BUF = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // inputs: [0] local, [1..4] neighbours
  input  logic [4:0]  in_valid,
  input  hacc_t       in_data   [5],
  output logic        loc_in_ready,
  output logic [2:0]  in_free   [5],
  // outputs: [0] local, [1..4] neighbours
  output logic [4:0]  out_valid,
  output hacc_t       out_data  [5],
  input  logic        loc_out_ready,
  input  logic [2:0]  out_free  [5],
  output logic        empty,
  output logic        stat_bubble
);
  localparam int unsigned CW = $clog2(BUF+1);

  logic [4:0]  hv, pop, elig, blocked_bubble;
  hacc_t       hd [5];
  logic [2:0]  ro [5];
  logic [CW-1:0] cnt [5];
  logic [4:0]  fifo_in_ready;

  for (genvar i = 0; i < 5; i++) begin : g_in
    sync_fifo #(.W($bits(hacc_t)), .DEPTH(BUF)) u_buf (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(fifo_in_ready[i]), .in_data(in_data[i]),
      .out_valid(hv[i]), .out_ready(pop[i]), .out_data(hd[i]), .count(cnt[i])
    );
    assign in_free[i] = 3'(BUF - int'(cnt[i]));
  end
  assign loc_in_ready = fifo_in_ready[0];

  function automatic logic [2:0] route(input logic [7:0] m);
    int dx, dy, d;
    dx = 2 * (int'(m) % MPT) + 1;
    dy = int'(m) / MPT;
    if (dx != X) begin
      d = (dx - int'(X) + NX) % NX;
      return (d <= NX / 2) ? 3'd1 : 3'd2;
    end else if (dy != Y) begin
      d = (dy - int'(Y) + NY) % NY;
      return (d <= NY / 2) ? 3'd3 : 3'd4;
    end
    return 3'd0;
  endfunction

  // dimension of a port: 0 local, 1 X, 2 Y
  function automatic int dim(input int p);
    return (p == 0) ? 0 : (p <= 2) ? 1 : 2;
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      int need;
      ro[i] = route(hd[i].nm_id);
      need = (dim(i) == dim(int'(ro[i]))) ? 1 : 2;
      if (ro[i] == 3'd0) begin
        elig[i] = hv[i] && loc_out_ready;
        blocked_bubble[i] = 1'b0;
      end else begin
        elig[i] = hv[i] && (int'(out_free[ro[i]]) >= need);
        blocked_bubble[i] = hv[i] && (need == 2) && (out_free[ro[i]] == 3'd1);
      end
    end
  end

  logic [2:0] rr [5];
  logic [2:0] gnt [5];
  logic [4:0] any;
  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++) begin
      any[o] = 1'b0;
      gnt[o] = rr[o];
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (!any[o] && elig[i] && (ro[i] == 3'(o))) begin
          any[o] = 1'b1;
          gnt[o] = 3'(i);
        end
      end
      out_valid[o] = any[o];
      out_data[o]  = hd[gnt[o]];
      if (any[o]) pop[gnt[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 5; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < 5; o++)
        if (any[o]) rr[o] <= 3'((int'(gnt[o]) + 1) % 5);
    end
  end

  assign empty = ~|hv;
  assign stat_bubble = |blocked_bubble;

  // An upstream router only sends into a free slot.
  for (genvar i = 1; i < 5; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) in_valid[i] |-> fifo_in_ready[i])
      else $error("torus_router: packet sent into a full buffer");
  end
endmodule
