// drhm_mapper: Dynamically Reseeding Hash-based Mapping (DRHM).
//
// Maps the TAG of a partial product to the NeuraMem that accumulates it with
// the paper's lower-k-bit hash  H_l(TAG, gamma) = ((TAG << K) >> K) * gamma
// mod N, evaluated in 32-bit arithmetic. The seed gamma comes from a small
// lookup table of NSEEDS random seeds, so only seeds are stored, never a
// per-index map. Every output row has its own seed: the table is indexed by the
// row part of the TAG, (TAG >> ROW_SHIFT) mod NSEEDS, so consecutive rows are
// hashed with different random seeds while every partial product of one output
// element always goes to the same NeuraMem (consistency).
//
// Seeds come from a 32-bit Galois LFSR (x^32+x^22+x^2+x+1) and are forced
// odd. After reset, and after each reseed pulse, the table is refilled with
// the next NSEEDS LFSR values, one per cycle; ready is low while it refills.
// All copies of this block in a chip see the same reset and reseed and so
// hold identical tables. The table indexing, the LFSR, K, ROW_SHIFT and NSEEDS
// are choices of this implementation; the paper gives only the hash equation
// and that the seed is renewed per row from a compact lookup table.
//
// Lookup is combinational: nm_id is valid in the same cycle as tag.
module drhm_mapper
  import neurachip_pkg::*;
#(
  parameter int unsigned N         = 32,
  parameter int unsigned K         = 16,
  parameter int unsigned ROW_SHIFT = 8,
  parameter int unsigned NSEEDS    = 64,
  parameter logic [31:0] LFSR_INIT = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reseed,
  output logic        ready,
  input  logic [31:0] tag,
  output logic [7:0]  nm_id,
  output logic [31:0] gamma
);
  localparam int unsigned SW = $clog2(NSEEDS);

  logic [31:0]   seeds [NSEEDS];
  logic [31:0]   lfsr;
  logic [SW-1:0] fill_ptr;
  logic          filling;

  function automatic logic [31:0] lfsr_next(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr     <= LFSR_INIT;
      fill_ptr <= '0;
      filling  <= 1'b1;
    end else if (reseed) begin
      fill_ptr <= '0;
      filling  <= 1'b1;
    end else if (filling) begin
      lfsr     <= lfsr_next(lfsr);
      fill_ptr <= fill_ptr + 1'b1;
      if (fill_ptr == SW'(NSEEDS - 1)) filling <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (filling && !reseed) seeds[fill_ptr] <= lfsr | 32'd1;
  end

  logic [31:0] h;
  always_comb begin
    gamma = seeds[SW'((tag >> ROW_SHIFT) % NSEEDS)];
    h     = drhm_hash(tag, gamma, K, N);
    nm_id = h[7:0];
  end
  assign ready = !filling;
endmodule
