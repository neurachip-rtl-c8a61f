// tb_neurachip_top: end-to-end SpGEMM test of the chip at reduced size.
//
// Two tiles with two NeuraCores and two NeuraMems each (a 4 x 2 torus) and
// small HashPads (128 hash-lines per engine) so that hash collisions occur.
// Runs two random SpGEMMs with a DRHM reseed in between, checks every output
// element against a reference product, and checks that each mechanism of the
// design occurred: hash-line merge, rolling eviction (one per output
// non-zero), hash collision stall, coalesced DRAM read, router bubble stall
// and reseed.
module tb_neurachip_top;
  localparam int TNT = 2;
  localparam int NA = 28, NK = 24, NB = 80, DA = 25, DB = 25, RUNS = 2;
  localparam int WATCHDOG = 200000;

  `include "spgemm_tb_body.svh"

  neurachip_top #(.NT(TNT), .CPT(2), .MPT(2), .LINES(128)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_instr, .reseed_req,
    .rd_valid, .rd_ready, .rd_line, .rd_resp_valid, .rd_resp_line, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_line, .wr_data, .wr_be, .idle, .stats
  );

  task automatic expect_seen(input string what, input int unsigned n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never occurred: %s", what);
    end
  endtask

  task automatic check_mechanisms();
    expect_seen("hash-line merge", stats.hacc_merged);
    expect_seen("rolling eviction", stats.evictions);
    expect_seen("hash collision", stats.collision_cyc);
    expect_seen("coalesced read", stats.coalesced);
    expect_seen("bubble stall", stats.bubble_cyc);
    expect_seen("reseed", stats.reseeds);
    // every partial product is sent once, every output evicted once
    checks += 3;
    if (stats.hacc_sent != npp_total) begin failures++; $display("FAIL hacc %0d != %0d", stats.hacc_sent, npp_total); end
    if (stats.evictions != nout_total) begin failures++; $display("FAIL evictions %0d != %0d", stats.evictions, nout_total); end
    if (stats.hacc_merged != npp_total - nout_total) begin failures++; $display("FAIL merged %0d", stats.hacc_merged); end
  endtask
endmodule
