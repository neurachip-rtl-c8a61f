// tb_mem_controller: self-checking test of the per-tile memory controller.
//
// Four NeuraCore requesters issue random word reads from a small address
// window (so that several requests share a 128-bit line) and four NeuraMem
// writers issue random evicted-word writes; the DRAM side is the behavioural
// channel model with a fixed latency. Checks that every read is answered
// exactly once, to the requesting core, with the word held in DRAM; that
// every written word lands in DRAM; that reads were coalesced (one line read
// serving several requests); that the controller reports idle at the end.
module tb_mem_controller;
  import neurachip_pkg::*;
  import dram_backing_pkg::*;
  localparam int NC = 4, NM = 4, NREQ = 250, NWR = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0] creq_valid, creq_ready, cresp_valid;
  rd_req_t creq [NC];
  rd_resp_t cresp;
  logic [NM-1:0] mwr_valid, mwr_ready;
  wr_req_t mwr [NM];
  logic rd_valid, rd_ready, rd_resp_valid, wr_valid, wr_ready, idle, stat_coalesced, stat_line_read;
  logic [LINE_AW-1:0] rd_line, rd_resp_line, wr_line;
  logic [LINE_W-1:0] rd_resp_data, wr_data;
  logic [3:0] wr_be;

  mem_controller #(.NC(NC), .NM(NM)) dut (.*);
  dram_channel_model #(.LAT(20)) u_dram (.*);

  int checks = 0, failures = 0;
  logic [31:0] want_addr [logic [10:0]];
  int sent [NC], wsent [NM];
  int n_resp = 0, n_coal = 0, n_lines = 0;
  logic [31:0] wvals [logic [31:0]];

  initial begin
    bit cacc [NC], macc [NM];
    for (int a = 0; a < 256; a++) poke(32'h3000 + a, $urandom);
    creq_valid = '0; mwr_valid = '0;
    for (int c = 0; c < NC; c++) begin creq[c] = '0; sent[c] = 0; cacc[c] = 0; end
    for (int m = 0; m < NM; m++) begin mwr[m] = '0; wsent[m] = 0; macc[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    forever begin
      @(negedge clk);
      // a request accepted at the last edge is dropped; new ones may start
      for (int c = 0; c < NC; c++) begin
        if (cacc[c]) creq_valid[c] = 1'b0;
        if (!creq_valid[c] && sent[c] < NREQ && $urandom_range(0, 1) == 0) begin
          logic [10:0] meta;
          meta = {2'(c), 9'(sent[c])};
          creq[c].addr = 32'h3000 + $urandom_range(0, 63);
          creq[c].meta = meta;
          want_addr[meta] = creq[c].addr;
          creq_valid[c] = 1'b1;
        end
      end
      for (int m = 0; m < NM; m++) begin
        if (macc[m]) mwr_valid[m] = 1'b0;
        if (!mwr_valid[m] && wsent[m] < NWR && $urandom_range(0, 3) == 0) begin
          mwr[m].addr = 32'h9000 + 32'(m * NWR + wsent[m]);
          mwr[m].data = $urandom;
          wvals[mwr[m].addr] = mwr[m].data;
          mwr_valid[m] = 1'b1;
        end
      end
      #1;
      for (int c = 0; c < NC; c++) begin
        cacc[c] = creq_valid[c] && creq_ready[c];
        if (cacc[c]) sent[c]++;
      end
      for (int m = 0; m < NM; m++) begin
        macc[m] = mwr_valid[m] && mwr_ready[m];
        if (macc[m]) wsent[m]++;
      end
      if (n_resp == NC * NREQ && creq_valid == '0 && mwr_valid == '0 && idle) begin
        bit alldone;
        alldone = 1;
        for (int m = 0; m < NM; m++) if (wsent[m] < NWR) alldone = 0;
        for (int c = 0; c < NC; c++) if (sent[c] < NREQ) alldone = 0;
        if (alldone) break;
      end
    end
    repeat (40) @(posedge clk);   // let the last writes reach DRAM
    foreach (wvals[a]) begin
      checks++;
      if (peek(a) != wvals[a]) begin failures++; $display("FAIL write %h: %h/%h", a, peek(a), wvals[a]); end
    end
    checks++;
    if (want_addr.num() != 0) begin failures++; $display("FAIL %0d reads unanswered", want_addr.num()); end
    checks++;
    if (n_coal == 0) begin failures++; $display("FAIL no coalesced read"); end
    checks++;
    if (!idle) begin failures++; $display("FAIL not idle at end"); end
    $display("memctl: %0d responses from %0d line reads, %0d coalesced, %0d writes", n_resp, n_lines, n_coal, wvals.num());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (stat_coalesced) n_coal++;
      if (stat_line_read) n_lines++;
      for (int c = 0; c < NC; c++)
        if (cresp_valid[c]) begin
          n_resp++;
          checks++;
          if (cresp.meta[10:9] != 2'(c) || !want_addr.exists(cresp.meta)) begin
            failures++; $display("FAIL response meta %h to core %0d", cresp.meta, c);
          end else begin
            if (cresp.data != peek(want_addr[cresp.meta])) begin
              failures++; $display("FAIL data %h for addr %h", cresp.data, want_addr[cresp.meta]);
            end
            want_addr.delete(cresp.meta);
          end
        end
    end
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
