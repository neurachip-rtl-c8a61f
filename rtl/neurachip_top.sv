// neurachip_top: the NeuraChip accelerator.
//
// NT tiles, each with CPT NeuraCores, MPT NeuraMems, one memory controller on
// its own DRAM channel, and CPT+MPT routers; one dispatcher for the chip. The
// routers form an (CPT+MPT) x NT 2D torus: tile t is row y = t, and along the
// row NeuraCores (even x) and NeuraMems (odd x) alternate, each attached to
// the local port of one router. Defaults are the paper's Tile-16 configuration
// (8 tiles, 4 NeuraCores and 4 NeuraMems per tile, 8 routers per tile,
// 4 pipelines with 8 registers per NeuraCore, 4 hash engines of 2048
// hash-lines per NeuraMem).
//
// Dataflow (an SpGEMM C = A x B):
//  1. the dispatcher sends MMH4 instructions to the least loaded NeuraCore;
//  2. NeuraCores send word reads to their tile's memory controller;
//  3. the controller coalesces reads of the same DRAM line;
//  4. operand words return to the NeuraCore pipelines;
//  5. NeuraCores multiply and form HACC instructions, whose NeuraMem is chosen
//     by the DRHM hash of the TAG;
//  6. the torus carries each HACC to its NeuraMem;
//  7. the NeuraMem hash engine merges it into its hash-line and decrements the
//     rolling counter;
//  8. at counter zero the line is evicted and written to DRAM at address TAG
//     through the NeuraMem's tile memory controller.
//
// In this implementation NeuraCores reach only their own tile's memory
// controller (directly, not over the torus), and the torus carries only HACC
// traffic; the paper's Fig. 5 does not show which network carries the read
// traffic. idle is high when no instruction, request or partial product is
// left anywhere in the chip. stats counts the mechanisms of the design.
module neurachip_top
  import neurachip_pkg::*;
#(
  parameter int unsigned NT        = 8,
  parameter int unsigned CPT       = 4,
  parameter int unsigned MPT       = 4,
  parameter int unsigned PIPES     = 4,
  parameter int unsigned REGS      = 8,
  parameter int unsigned NAG       = 2,
  parameter int unsigned HE        = 4,
  parameter int unsigned LINES     = 2048,
  parameter int unsigned WAYS      = 4,
  parameter int unsigned DRHM_K    = 16,
  parameter int unsigned ROW_SHIFT = 8,
  parameter int unsigned NSEEDS    = 64,
  parameter int unsigned RBUF      = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction stream
  input  logic               in_valid,
  output logic               in_ready,
  input  mmh4_t              in_instr,
  input  logic               reseed_req,
  // DRAM channels, one per tile
  output logic [NT-1:0]      rd_valid,
  input  logic [NT-1:0]      rd_ready,
  output logic [LINE_AW-1:0] rd_line      [NT],
  input  logic [NT-1:0]      rd_resp_valid,
  input  logic [LINE_AW-1:0] rd_resp_line [NT],
  input  logic [LINE_W-1:0]  rd_resp_data [NT],
  output logic [NT-1:0]      wr_valid,
  input  logic [NT-1:0]      wr_ready,
  output logic [LINE_AW-1:0] wr_line      [NT],
  output logic [LINE_W-1:0]  wr_data      [NT],
  output logic [3:0]         wr_be        [NT],
  output logic               idle,
  output stats_t             stats
);
  localparam int unsigned NX = CPT + MPT;
  localparam int unsigned NY = NT;
  localparam int unsigned NC = NT * CPT;
  localparam int unsigned NM = NT * MPT;
  localparam int unsigned NR = NX * NY;

  // ---------------- dispatcher
  logic [NC-1:0] c_in_valid, c_in_ready, c_idle, c_hacc;
  logic [7:0]    c_load [NC];
  mmh4_t         d_instr;
  logic          reseed, d_busy, d_issue, d_reseed, work_idle;

  dispatcher #(.NCORES(NC)) u_disp (
    .clk, .rst_n, .in_valid, .in_ready, .in_instr,
    .reseed_req, .chip_idle(work_idle), .reseed,
    .core_valid(c_in_valid), .core_ready(c_in_ready), .core_load(c_load),
    .core_instr(d_instr), .busy(d_busy), .stat_issue(d_issue), .stat_reseed(d_reseed)
  );

  // ---------------- routers
  logic [4:0] r_in_valid  [NR];
  hacc_t      r_in_data   [NR][5];
  logic [2:0] r_in_free   [NR][5];
  logic [4:0] r_out_valid [NR];
  hacc_t      r_out_data  [NR][5];
  logic [2:0] r_out_free  [NR][5];
  logic [NR-1:0] r_loc_in_ready, r_loc_out_ready, r_empty, r_bubble;
  logic [NR-1:0] r_loc_in_valid;
  hacc_t         r_loc_in_data [NR];

  for (genvar y = 0; y < NY; y++) begin : g_ry
    for (genvar x = 0; x < NX; x++) begin : g_rx
      localparam int R  = y * NX + x;
      localparam int XP = y * NX + (x + 1) % NX;
      localparam int XM = y * NX + (x + NX - 1) % NX;
      localparam int YP = ((y + 1) % NY) * NX + x;
      localparam int YM = ((y + NY - 1) % NY) * NX + x;
      assign r_in_valid[R] = {r_out_valid[YM][3], r_out_valid[YP][4],
                              r_out_valid[XM][1], r_out_valid[XP][2], r_loc_in_valid[R]};
      assign r_in_data[R][0] = r_loc_in_data[R];
      assign r_in_data[R][1] = r_out_data[XP][2];
      assign r_in_data[R][2] = r_out_data[XM][1];
      assign r_in_data[R][3] = r_out_data[YP][4];
      assign r_in_data[R][4] = r_out_data[YM][3];
      assign r_out_free[R][0] = '0;
      assign r_out_free[R][1] = r_in_free[XP][2];
      assign r_out_free[R][2] = r_in_free[XM][1];
      assign r_out_free[R][3] = r_in_free[YP][4];
      assign r_out_free[R][4] = r_in_free[YM][3];
      torus_router #(.X(x), .Y(y), .NX(NX), .NY(NY), .MPT(MPT), .BUF(RBUF)) u_rt (
        .clk, .rst_n,
        .in_valid(r_in_valid[R]), .in_data(r_in_data[R]),
        .loc_in_ready(r_loc_in_ready[R]), .in_free(r_in_free[R]),
        .out_valid(r_out_valid[R]), .out_data(r_out_data[R]),
        .loc_out_ready(r_loc_out_ready[R]), .out_free(r_out_free[R]),
        .empty(r_empty[R]), .stat_bubble(r_bubble[R])
      );
    end
  end

  // ---------------- tiles
  logic [NM-1:0] m_empty;
  logic [7:0]    m_evict [NM];
  logic [7:0]    m_coll  [NM];
  logic [7:0]    m_hit   [NM];
  logic [31:0]   sum_evict, sum_coll, sum_hit;
  always_comb begin
    sum_evict = '0;
    sum_coll  = '0;
    sum_hit   = '0;
    for (int m = 0; m < NM; m++) begin
      sum_evict = sum_evict + 32'(m_evict[m]);
      sum_coll  = sum_coll  + 32'(m_coll[m]);
      sum_hit   = sum_hit   + 32'(m_hit[m]);
    end
  end
  logic [NT-1:0] mc_idle, mc_coal, mc_lread;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    logic [CPT-1:0] creq_valid, creq_ready, cresp_valid;
    rd_req_t        creq [CPT];
    rd_resp_t       cresp;
    logic [MPT-1:0] mwr_valid, mwr_ready;
    wr_req_t        mwr  [MPT];

    for (genvar c = 0; c < CPT; c++) begin : g_core
      localparam int CI = t * CPT + c;
      localparam int R  = t * NX + 2 * c;
      neuracore #(.PIPES(PIPES), .REGS(REGS), .NAG(NAG), .N_MEMS(NM),
                  .DRHM_K(DRHM_K), .ROW_SHIFT(ROW_SHIFT), .NSEEDS(NSEEDS)) u_core (
        .clk, .rst_n, .reseed,
        .in_valid(c_in_valid[CI]), .in_ready(c_in_ready[CI]), .in_instr(d_instr),
        .load(c_load[CI]),
        .mreq_valid(creq_valid[c]), .mreq_ready(creq_ready[c]), .mreq(creq[c]),
        .mresp_valid(cresp_valid[c]), .mresp(cresp),
        .out_valid(r_loc_in_valid[R]), .out_ready(r_loc_in_ready[R]),
        .out_hacc(r_loc_in_data[R]),
        .idle(c_idle[CI]), .stat_hacc(c_hacc[CI])
      );
      assign r_loc_out_ready[R] = 1'b0;   // nothing is addressed to a NeuraCore
    end

    for (genvar m = 0; m < MPT; m++) begin : g_mem
      localparam int MI = t * MPT + m;
      localparam int R  = t * NX + 2 * m + 1;
      neuramem #(.HE(HE), .LINES(LINES), .WAYS(WAYS), .ENG_SHIFT($clog2(NM))) u_mem (
        .clk, .rst_n,
        .in_valid(r_out_valid[R][0]), .in_ready(r_loc_out_ready[R]),
        .in_hacc(r_out_data[R][0]),
        .wr_valid(mwr_valid[m]), .wr_ready(mwr_ready[m]), .wr_data(mwr[m]),
        .empty(m_empty[MI]), .stat_evict(m_evict[MI]), .stat_collision(m_coll[MI]),
        .stat_hit(m_hit[MI]), .stat_bad_op()
      );
      assign r_loc_in_valid[R] = 1'b0;
      assign r_loc_in_data[R]  = '0;
    end

    mem_controller #(.NC(CPT), .NM(MPT)) u_mc (
      .clk, .rst_n,
      .creq_valid, .creq_ready, .creq, .cresp_valid, .cresp,
      .mwr_valid, .mwr_ready, .mwr,
      .rd_valid(rd_valid[t]), .rd_ready(rd_ready[t]), .rd_line(rd_line[t]),
      .rd_resp_valid(rd_resp_valid[t]), .rd_resp_line(rd_resp_line[t]),
      .rd_resp_data(rd_resp_data[t]),
      .wr_valid(wr_valid[t]), .wr_ready(wr_ready[t]), .wr_line(wr_line[t]),
      .wr_data(wr_data[t]), .wr_be(wr_be[t]),
      .idle(mc_idle[t]), .stat_coalesced(mc_coal[t]), .stat_line_read(mc_lread[t])
    );
  end

  // work_idle: nothing left in cores, network, NeuraMems and controllers
  assign work_idle = (&c_idle) && (&m_empty) && (&r_empty) && (&mc_idle);
  assign idle      = work_idle && !d_busy && !in_valid;

  // ---------------- event counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      stats.mmh4_issued   <= stats.mmh4_issued   + 32'(d_issue);
      stats.hacc_sent     <= stats.hacc_sent     + 32'($countones(c_hacc));
      stats.hacc_merged   <= stats.hacc_merged   + sum_hit;
      stats.evictions     <= stats.evictions     + sum_evict;
      stats.collision_cyc <= stats.collision_cyc + sum_coll;
      stats.line_reads    <= stats.line_reads    + 32'($countones(mc_lread));
      stats.coalesced     <= stats.coalesced     + 32'($countones(mc_coal));
      stats.bubble_cyc    <= stats.bubble_cyc    + 32'($countones(r_bubble));
      stats.reseeds       <= stats.reseeds       + 32'(d_reseed);
    end
  end
endmodule
