// tb_hash_engine: self-checking test of one hash engine.
//
// A 16-line, 4-way engine with SET_SHIFT = 0, so the set of a TAG is
// (TAG ^ (TAG >> 2)) mod 4 and tags 0x00, 0x10, 0x20, ... share set 0.
// Part 1 fills set 0 with four tags and sends two more, which must be parked
// as collisions and complete once the first four are evicted. Part 2 sends a
// random interleaving of partial products for 12 tags (1 to 6 products each),
// with random stalls on the eviction side. Every eviction is checked against
// the reference sum, each tag must be evicted exactly once with its last
// product, and a run of 8 hits on resident lines must be taken one per cycle.
module tb_hash_engine;
  import neurachip_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_ready, ev_valid, ev_ready;
  hacc_t in_hacc;
  wr_req_t ev_data;
  logic empty, s_hit, s_ins, s_ev, s_col;
  logic [4:0] used;

  hash_engine #(.LINES(16), .WAYS(4), .SET_SHIFT(0), .RETRY(4)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_hacc, .ev_valid, .ev_ready, .ev_data,
    .used_lines(used), .empty, .stat_hit(s_hit), .stat_insert(s_ins),
    .stat_evict(s_ev), .stat_collision(s_col)
  );

  int checks = 0, failures = 0;
  int unsigned exp_sum [int unsigned];
  int unsigned evicted [int unsigned];
  int n_coll = 0;
  bit random_stall = 0;

  always @(posedge clk) if (s_col) n_coll++;
  always @(posedge clk) ev_ready <= random_stall ? ($urandom_range(3) != 0) : 1'b1;

  // eviction checker
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    checks++;
    if (!exp_sum.exists(ev_data.addr) || evicted.exists(ev_data.addr) ||
        exp_sum[ev_data.addr] != ev_data.data) begin
      failures++;
      $display("FAIL eviction tag %h data %0d", ev_data.addr, ev_data.data);
    end
    evicted[ev_data.addr] = 1;
  end

  task automatic send(input logic [31:0] tag, input logic [31:0] data, input logic [31:0] ctr);
    @(negedge clk);
    in_hacc = '{opcode: OP_HACC, tag: tag, data: data, counter: ctr, nm_id: 8'd0, unused: '0};
    in_valid = 1'b1;
    #1;
    while (!in_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    in_valid <= 1'b0;
  endtask

  initial begin
    hacc_t stream [$];
    int unsigned tags [12];
    int unsigned np [12];
    ev_ready = 1'b1;
    in_hacc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // ---- part 1: collisions in set 0
    for (int t = 0; t < 6; t++) exp_sum[32'h10 * t] = 0;
    for (int t = 0; t < 6; t++) begin
      send(32'h10 * t, 100 + t, 1);
      exp_sum[32'h10 * t] += 100 + t;
    end
    @(negedge clk);
    checks++;
    if (n_coll != 2) begin failures++; $display("FAIL expected 2 collisions, saw %0d", n_coll); end
    for (int t = 0; t < 6; t++) begin
      send(32'h10 * t, 7, 1);
      exp_sum[32'h10 * t] += 7;
    end
    repeat (20) @(posedge clk);
    for (int t = 0; t < 6; t++) begin
      checks++;
      if (!evicted.exists(32'h10 * t)) begin failures++; $display("FAIL tag %h not evicted", 32'h10 * t); end
    end
    checks++;
    if (!empty || used != 0) begin failures++; $display("FAIL engine not empty after part 1"); end

    // ---- throughput: 4 resident lines, 8 back-to-back hits
    for (int t = 0; t < 4; t++) begin
      exp_sum[32'h1000 + t] = 1;
      send(32'h1000 + t, 1, 2);
    end
    begin
      int c0, c1;
      @(negedge clk);
      c0 = $time;
      for (int h = 0; h < 8; h++) begin
        in_valid = 1'b1;
        in_hacc = '{opcode: OP_HACC, tag: 32'h1000 + (h % 4), data: 32'd2, counter: 32'd2, nm_id: 8'd0, unused: '0};
        exp_sum[32'h1000 + (h % 4)] += 2;
        #1;
        checks++;
        if (!in_ready) begin failures++; $display("FAIL hit %0d not accepted at once", h); end
        @(negedge clk);
      end
      in_valid = 1'b0;
      c1 = $time;
      checks++;
      if ((c1 - c0) / 10 != 8) begin failures++; $display("FAIL 8 hits took %0d cycles", (c1 - c0) / 10); end
    end
    repeat (5) @(posedge clk);

    // ---- part 2: random interleaving with eviction back-pressure
    random_stall = 1;
    for (int t = 0; t < 12; t++) begin
      tags[t] = 32'h2000 + 32'($urandom_range(255)) * 4 + t % 4;
      while (exp_sum.exists(tags[t])) tags[t] = tags[t] + 32'h400;
      np[t] = $urandom_range(6, 1);
      exp_sum[tags[t]] = 0;
      for (int k = 0; k < np[t]; k++) begin
        hacc_t h;
        h = '{opcode: OP_HACC, tag: tags[t], data: $urandom_range(1000), counter: np[t] - 1, nm_id: 8'd0, unused: '0};
        exp_sum[tags[t]] += h.data;
        stream.push_back(h);
      end
    end
    stream.shuffle();
    foreach (stream[i]) send(stream[i].tag, stream[i].data, stream[i].counter);
    repeat (60) @(posedge clk);
    foreach (exp_sum[t]) begin
      checks++;
      if (!evicted.exists(t)) begin failures++; $display("FAIL tag %h never evicted", t); end
    end
    checks++;
    if (!empty) begin failures++; $display("FAIL engine not empty at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
