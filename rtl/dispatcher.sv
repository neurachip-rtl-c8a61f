// dispatcher: issues MMH4 instructions to the NeuraCores.
//
// Instructions arrive as a stream (valid/ready) from the host side. Each cycle
// the head instruction goes to the NeuraCore with the lowest load (buffered
// instructions plus occupied register slots) among those that can take it;
// ties go to the lowest core number. This is the paper's dynamic allocation
// of multiplication tasks "depending on its utilization"; the load metric and
// tie rule are choices of this implementation.
//
// Reseeding of the DRHM seed tables: a reseed request stops the issue of
// further instructions; once the whole chip is idle (chip_idle, so no partial
// product is still on its way to a NeuraMem) the dispatcher pulses reseed for
// one cycle to every DRHM mapper and resumes. Waiting for idle keeps the
// mapping of every output element consistent. One instruction is issued per
// cycle at most.
module dispatcher
  import neurachip_pkg::*;
#(
  parameter int unsigned NCORES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  mmh4_t             in_instr,
  input  logic              reseed_req,
  input  logic              chip_idle,
  output logic              reseed,
  output logic [NCORES-1:0] core_valid,
  input  logic [NCORES-1:0] core_ready,
  input  logic [7:0]        core_load [NCORES],
  output mmh4_t             core_instr,
  output logic              busy,
  output logic              stat_issue,
  output logic              stat_reseed
);
  localparam int unsigned CB = (NCORES > 1) ? $clog2(NCORES) : 1;

  logic          pend;
  logic          any;
  logic [CB-1:0] sel;
  logic [7:0]    best;

  always_comb begin
    any  = 1'b0;
    sel  = '0;
    best = '1;
    for (int c = 0; c < NCORES; c++)
      if (core_ready[c] && (!any || core_load[c] < best)) begin
        any  = 1'b1;
        sel  = CB'(c);
        best = core_load[c];
      end
    core_valid = '0;
    core_valid[sel] = in_valid && any && !pend;
    in_ready = any && !pend;
  end
  assign core_instr = in_instr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend   <= 1'b0;
      reseed <= 1'b0;
    end else begin
      reseed <= 1'b0;
      if (reseed_req && !pend) pend <= 1'b1;
      if (pend && chip_idle && !reseed) begin
        reseed <= 1'b1;
        pend   <= 1'b0;
      end
    end
  end

  assign busy        = pend || reseed;
  assign stat_issue  = in_valid && in_ready;
  assign stat_reseed = reseed;
endmodule
