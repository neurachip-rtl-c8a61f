// tb_torus_router: self-checking test of one torus router.
//
// The testbench plays all four neighbours and the local endpoint of the
// router at (X=2, Y=1) of the 8x8 torus. Random HACC packets for random
// NeuraMems enter every input (neighbour inputs only when the router reports
// a free slot); the downstream free-slot counts and the local ready are
// random. Checks, per delivered packet: it leaves on the port given by an
// independent dimension-order, shortest-way reference route; it leaves into
// a slot that is free (one free slot when it stays in its ring, two when it
// enters a ring: the bubble rule); it is delivered exactly once. Also checks
// that the bubble rule was seen to hold a packet back.
module tb_torus_router;
  import neurachip_pkg::*;
  localparam int X = 2, Y = 1, NX = 8, NY = 8, MPT = 4, BUF = 4;
  localparam int NPKT = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [4:0] in_valid, out_valid;
  hacc_t in_data [5], out_data [5];
  logic loc_in_ready, loc_out_ready, empty, stat_bubble;
  logic [2:0] in_free [5], out_free [5];

  torus_router #(.X(X), .Y(Y), .NX(NX), .NY(NY), .MPT(MPT), .BUF(BUF)) dut (.*);

  int checks = 0, failures = 0, n_bubble = 0;
  bit pending [logic [31:0]];
  int n_sent = 0, n_recv = 0;

  function automatic int ref_route(input int m);
    int dx, dy, d;
    dx = 2 * (m % MPT) + 1;
    dy = m / MPT;
    if (dx != X) begin
      d = (dx - X + NX) % NX;
      return (d <= NX / 2) ? 1 : 2;
    end
    if (dy != Y) begin
      d = (dy - Y + NY) % NY;
      return (d <= NY / 2) ? 3 : 4;
    end
    return 0;
  endfunction

  function automatic int dim(input int p);
    return (p == 0) ? 0 : (p <= 2) ? 1 : 2;
  endfunction

  initial begin
    in_valid = '0;
    loc_out_ready = 0;
    for (int i = 0; i < 5; i++) begin in_data[i] = '0; out_free[i] = 3'(BUF); end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (n_sent < NPKT || n_recv < n_sent) begin
      @(negedge clk);
      loc_out_ready = ($urandom_range(0, 3) != 0);
      for (int o = 1; o < 5; o++) out_free[o] = 3'($urandom_range(0, BUF));
      in_valid = '0;
      #1;
      for (int i = 0; i < 5; i++) begin
        bit can;
        can = (i == 0) ? loc_in_ready : (in_free[i] != 0);
        if (n_sent < NPKT && can && $urandom_range(0, 2) != 0) begin
          hacc_t h;
          h = '0;
          h.opcode = OP_HACC;
          h.tag = {8'(i), 24'(n_sent)};
          h.nm_id = 8'($urandom_range(0, 31));
          h.data = $urandom;
          in_data[i] = h;
          in_valid[i] = 1'b1;
          pending[h.tag] = 1'b1;
          n_sent++;
        end
      end
    end
    checks++;
    if (n_bubble == 0) begin failures++; $display("FAIL bubble rule never held a packet"); end
    checks++;
    if (pending.num() != 0) begin failures++; $display("FAIL %0d packets lost", pending.num()); end
    $display("router: %0d packets, %0d bubble cycles", n_recv, n_bubble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (stat_bubble) n_bubble++;
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && (o != 0 || loc_out_ready)) begin
        int src, need;
        src = int'(out_data[o].tag[31:24]);
        need = (dim(src) == dim(o)) ? 1 : 2;
        n_recv++;
        checks++;
        if (!pending.exists(out_data[o].tag)) begin
          failures++; $display("FAIL duplicate/unknown packet %h on port %0d", out_data[o].tag, o);
        end else if (ref_route(int'(out_data[o].nm_id)) != o) begin
          failures++; $display("FAIL packet for mem %0d left on port %0d", out_data[o].nm_id, o);
        end else if (o != 0 && int'(out_free[o]) < need) begin
          failures++; $display("FAIL port %0d used with %0d free slots (need %0d)", o, out_free[o], need);
        end
        pending.delete(out_data[o].tag);
      end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
