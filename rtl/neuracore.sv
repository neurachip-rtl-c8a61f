// neuracore: NeuraCore multiplication engine (quad-pipeline layout).
//
// MMH4 instructions from the dispatcher enter an instruction buffer. The
// control unit decodes the head instruction and allocates it to one of the
// PIPES pipelines in round-robin order, skipping pipelines whose register file
// is full. NAG address generators, each shared by PIPES/NAG neighbouring
// pipelines, turn the slots' outstanding operand requests into word reads; a
// round-robin port arbiter sends one read per cycle to the tile's memory
// controller. Each read carries meta = {pipeline, slot, operand index} so the
// response, which may come back in any order, is routed to its pipeline and
// slot. Pipelines whose scoreboard shows a complete slot multiply and emit
// HACC instructions; a round-robin arbiter picks one per cycle, the DRHM
// mapper computes its destination NeuraMem from the TAG, and the HACC leaves
// towards the core's router.
//
// Follows the paper: instruction buffer, control unit, round-robin pipeline
// allocation, register file with scoreboard, multiplier per pipeline, two
// address generators, hash-based choice of the destination NeuraMem.
// Own choices: one memory port and one network port instead of the four
// NW/NE/SW/SE ports (so no adaptive port choice), operand capture per slot,
// the meta encoding (at most 4 pipelines and 8 slots), and dropping an
// instruction whose opcode is not MMH4.
//
// load = instructions buffered plus slots occupied, used by the dispatcher.
module neuracore
  import neurachip_pkg::*;
#(
  parameter int unsigned PIPES     = 4,
  parameter int unsigned REGS      = 8,
  parameter int unsigned NAG       = 2,
  parameter int unsigned IBUF      = 4,
  parameter int unsigned N_MEMS    = 32,
  parameter int unsigned DRHM_K    = 16,
  parameter int unsigned ROW_SHIFT = 8,
  parameter int unsigned NSEEDS    = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     reseed,
  // from dispatcher
  input  logic     in_valid,
  output logic     in_ready,
  input  mmh4_t    in_instr,
  output logic [7:0] load,
  // memory read port
  output logic     mreq_valid,
  input  logic     mreq_ready,
  output rd_req_t  mreq,
  input  logic     mresp_valid,
  input  rd_resp_t mresp,
  // HACC output to router
  output logic     out_valid,
  input  logic     out_ready,
  output hacc_t    out_hacc,
  output logic     idle,
  output logic     stat_hacc
);
  localparam int unsigned PB  = (PIPES > 1) ? $clog2(PIPES) : 1;
  localparam int unsigned SB  = $clog2(REGS);
  localparam int unsigned PPA = PIPES / NAG;
  localparam int unsigned AB  = (NAG > 1) ? $clog2(NAG) : 1;

  // ---- instruction buffer
  logic  q_valid, q_ready;
  mmh4_t q_instr;
  logic [$clog2(IBUF+1)-1:0] q_count;
  sync_fifo #(.W($bits(mmh4_t)), .DEPTH(IBUF)) u_ibuf (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_instr),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_instr), .count(q_count)
  );

  // ---- pipelines
  logic [PIPES-1:0] p_alloc_valid, p_alloc_ready, p_req_valid, p_req_fire;
  logic [PIPES-1:0] p_resp_valid, p_out_valid, p_out_ready;
  logic [SB-1:0]    p_req_slot [PIPES];
  logic [5:0]       p_req_idx  [PIPES];
  logic [31:0]      p_req_addr [PIPES];
  hacc_t            p_out      [PIPES];
  logic [$clog2(REGS+1)-1:0] p_occ [PIPES];

  logic [PB-1:0] r_slot_pipe;
  assign r_slot_pipe = mresp.meta[10:9];

  for (genvar p = 0; p < PIPES; p++) begin : g_pipe
    assign p_resp_valid[p] = mresp_valid && (r_slot_pipe == PB'(p));
    neuracore_pipeline #(.REGS(REGS)) u_pipe (
      .clk, .rst_n,
      .alloc_valid(p_alloc_valid[p]), .alloc_ready(p_alloc_ready[p]), .alloc_instr(q_instr),
      .req_valid(p_req_valid[p]), .req_slot(p_req_slot[p]), .req_idx(p_req_idx[p]),
      .req_addr(p_req_addr[p]), .req_fire(p_req_fire[p]),
      .resp_valid(p_resp_valid[p]), .resp_slot(SB'(mresp.meta[8:6])), .resp_idx(mresp.meta[5:0]),
      .resp_data(mresp.data),
      .out_valid(p_out_valid[p]), .out_ready(p_out_ready[p]), .out_hacc(p_out[p]),
      .scoreboard(), .occupancy(p_occ[p])
    );
  end

  // ---- control unit: decode and round-robin pipeline allocation
  logic [PB-1:0] alloc_rr, alloc_sel;
  logic          alloc_any, bad_op;
  assign bad_op = q_instr.opcode != OP_MMH4;
  always_comb begin
    alloc_any = 1'b0;
    alloc_sel = alloc_rr;
    for (int k = 0; k < PIPES; k++) begin
      int idx;
      idx = (int'(alloc_rr) + k) % PIPES;
      if (!alloc_any && p_alloc_ready[idx]) begin
        alloc_any = 1'b1;
        alloc_sel = PB'(idx);
      end
    end
    p_alloc_valid = '0;
    p_alloc_valid[alloc_sel] = q_valid && !bad_op && alloc_any;
    q_ready = bad_op || alloc_any;
  end

  // ---- address generators and memory port arbiter
  logic [NAG-1:0] ag_valid;
  logic [PB-1:0]  ag_pipe [NAG];
  logic [PB-1:0]  ag_rr   [NAG];
  logic [AB-1:0]  port_rr, port_sel;
  logic           port_any;

  always_comb begin
    for (int g = 0; g < NAG; g++) begin
      ag_valid[g] = 1'b0;
      ag_pipe[g]  = PB'(g * PPA);
      for (int k = 0; k < PPA; k++) begin
        if (!ag_valid[g] && p_req_valid[g * PPA + ((int'(ag_rr[g]) + k) % PPA)]) begin
          ag_valid[g] = 1'b1;
          ag_pipe[g]  = PB'(g * PPA + ((int'(ag_rr[g]) + k) % PPA));
        end
      end
    end
    port_any = 1'b0;
    port_sel = port_rr;
    for (int k = 0; k < NAG; k++) begin
      if (!port_any && ag_valid[(int'(port_rr) + k) % NAG]) begin
        port_any = 1'b1;
        port_sel = AB'((int'(port_rr) + k) % NAG);
      end
    end
    mreq_valid = port_any;
    mreq.addr  = p_req_addr[ag_pipe[port_sel]];
    mreq.meta  = {2'(ag_pipe[port_sel]), 3'(p_req_slot[ag_pipe[port_sel]]),
                  p_req_idx[ag_pipe[port_sel]]};
  end

  for (genvar p = 0; p < PIPES; p++) begin : g_fire
    assign p_req_fire[p] = port_any && mreq_ready && (ag_pipe[port_sel] == PB'(p));
  end

  // ---- HACC output arbiter with DRHM destination
  logic [PB-1:0] out_rr, out_sel;
  logic          out_any, drhm_ready;
  logic [7:0]    nm_id;
  always_comb begin
    out_any = 1'b0;
    out_sel = out_rr;
    for (int k = 0; k < PIPES; k++) begin
      int idx;
      idx = (int'(out_rr) + k) % PIPES;
      if (!out_any && p_out_valid[idx]) begin
        out_any = 1'b1;
        out_sel = PB'(idx);
      end
    end
  end

  always_comb begin
    out_valid = out_any && drhm_ready;
    out_hacc  = p_out[out_sel];
    out_hacc.nm_id = nm_id;
  end

  for (genvar p = 0; p < PIPES; p++) begin : g_ordy
    assign p_out_ready[p] = out_ready && drhm_ready && (out_sel == PB'(p));
  end

  drhm_mapper #(.N(N_MEMS), .K(DRHM_K), .ROW_SHIFT(ROW_SHIFT), .NSEEDS(NSEEDS)) u_drhm (
    .clk, .rst_n, .reseed, .ready(drhm_ready), .tag(p_out[out_sel].tag),
    .nm_id(nm_id), .gamma()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alloc_rr <= '0;
      port_rr  <= '0;
      out_rr   <= '0;
      for (int g = 0; g < NAG; g++) ag_rr[g] <= '0;
    end else begin
      if (q_valid && !bad_op && alloc_any) alloc_rr <= PB'((int'(alloc_sel) + 1) % PIPES);
      if (mreq_valid && mreq_ready) begin
        port_rr <= AB'((int'(port_sel) + 1) % NAG);
        ag_rr[port_sel] <= PB'((int'(ag_pipe[port_sel]) - int'(port_sel) * PPA + 1) % PPA);
      end
      if (out_valid && out_ready) out_rr <= PB'((int'(out_sel) + 1) % PIPES);
    end
  end

  logic [7:0] occ_sum;
  always_comb begin
    occ_sum = 8'(q_count);
    for (int p = 0; p < PIPES; p++) occ_sum = occ_sum + 8'(p_occ[p]);
  end
  assign load      = occ_sum;
  assign idle      = (occ_sum == '0);
  assign stat_hacc = out_valid && out_ready;
endmodule
