// tb_neuramem: self-checking test of one NeuraMem.
//
// A shuffled stream of HACC instructions for 40 output TAGs (1 to 6 partial
// products each, rolling counter = products - 1) is sent with random gaps,
// plus one instruction with a bad opcode; the eviction port sees random
// back-pressure. Checks that every TAG is evicted exactly once with the sum
// of its partial products, that nothing else is evicted, that the number of
// merges reported equals products - TAGs, that every engine was used, that
// the bad opcode is dropped and counted, and that the unit ends empty.
module tb_neuramem;
  import neurachip_pkg::*;
  localparam int HE = 4, NT = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, wr_valid, wr_ready, empty, stat_bad_op;
  hacc_t in_hacc;
  wr_req_t wr_data;
  logic [7:0] stat_evict, stat_collision, stat_hit;

  neuramem #(.HE(HE), .LINES(64), .WAYS(4), .ENG_SHIFT(0), .IBUF(4)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] sum [logic [31:0]];
  hacc_t stream [$];
  int n_hit = 0, n_ev = 0, n_bad = 0;
  int eng_used [HE];

  initial begin
    in_valid = 0; in_hacc = '0; wr_ready = 0;
    for (int t = 0; t < NT; t++) begin
      logic [31:0] tag;
      int np;
      tag = 32'h0004_0000 + 32'(t * 7);
      np = $urandom_range(1, 6);
      sum[tag] = 0;
      eng_used[tag % HE]++;
      for (int p = 0; p < np; p++) begin
        hacc_t h;
        h = '{opcode: OP_HACC, tag: tag, data: $urandom_range(0, 100000), counter: np - 1, nm_id: 8'd0, unused: '0};
        sum[tag] += h.data;
        stream.push_back(h);
      end
    end
    stream.shuffle();
    stream.insert(stream.size() / 2, '{opcode: 8'h05, tag: 32'h1234, data: 32'd1, counter: 32'd0, nm_id: 8'd0, unused: '0});
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (stream[i]) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      in_hacc = stream[i];
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (2000) begin
      @(negedge clk);
      if (empty && sum.num() == 0) break;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (sum.num() != 0) begin failures++; $display("FAIL %0d TAGs never evicted", sum.num()); end
    checks++;
    if (n_hit != stream.size() - 1 - NT) begin failures++; $display("FAIL %0d merges, expected %0d", n_hit, stream.size() - 1 - NT); end
    checks++;
    if (n_ev != NT) begin failures++; $display("FAIL %0d evictions counted", n_ev); end
    checks++;
    if (n_bad != 1) begin failures++; $display("FAIL bad opcode counted %0d times", n_bad); end
    checks++;
    if (!empty) begin failures++; $display("FAIL unit not empty"); end
    for (int e = 0; e < HE; e++) begin
      checks++;
      if (eng_used[e] == 0) begin failures++; $display("FAIL engine %0d unused", e); end
    end
    $display("neuramem: %0d HACCs, %0d merges, %0d evictions", stream.size(), n_hit, n_ev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) wr_ready = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    n_hit += int'(stat_hit);
    n_ev += int'(stat_evict);
    if (stat_bad_op) n_bad++;
    if (wr_valid && wr_ready) begin
      checks++;
      if (!sum.exists(wr_data.addr)) begin
        failures++; $display("FAIL unexpected eviction of %h", wr_data.addr);
      end else begin
        if (sum[wr_data.addr] != wr_data.data) begin
          failures++; $display("FAIL TAG %h sum %0d expected %0d", wr_data.addr, wr_data.data, sum[wr_data.addr]);
        end
        sum.delete(wr_data.addr);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog (%0d TAGs open, empty=%0b in_ready=%0b wr_valid=%0b)", sum.num(), empty, in_ready, wr_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
