// tb_neurachip_full: one SpGEMM on the chip at its default (Tile-16) size.
//
// Eight tiles of four NeuraCores and four NeuraMems, 2048 hash-lines per
// hash engine. A random 32 x 32 by 32 x 32 sparse product is compiled to MMH4
// instructions, run to completion and checked element by element, together
// with the number of partial products sent and of hash-lines evicted.
module tb_neurachip_full;
  localparam int TNT = 8;
  localparam int NA = 32, NK = 32, NB = 32, DA = 20, DB = 20, RUNS = 1;
  localparam int WATCHDOG = 200000;

  `include "spgemm_tb_body.svh"

  neurachip_top dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_instr, .reseed_req,
    .rd_valid, .rd_ready, .rd_line, .rd_resp_valid, .rd_resp_line, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_line, .wr_data, .wr_be, .idle, .stats
  );

  task automatic check_mechanisms();
    checks += 2;
    if (stats.hacc_sent != npp_total) begin failures++; $display("FAIL hacc %0d != %0d", stats.hacc_sent, npp_total); end
    if (stats.evictions != nout_total) begin failures++; $display("FAIL evictions %0d != %0d", stats.evictions, nout_total); end
  endtask
endmodule
