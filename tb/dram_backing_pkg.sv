// dram_backing_pkg: word storage shared by all simulated DRAM channels.
//
// The channel models read and write this one associative array (unwritten
// words read as zero). Testbenches load inputs and inspect results through
// poke() and peek(). Simulation only.
package dram_backing_pkg;
  logic [31:0] mem [int unsigned];
  function automatic void poke(input int unsigned a, input logic [31:0] d);
    mem[a] = d;
  endfunction
  function automatic logic [31:0] peek(input int unsigned a);
    return mem.exists(a) ? mem[a] : 32'd0;
  endfunction
endpackage
