// mem_controller: per-tile memory controller between the tile's NeuraCores and
// NeuraMems and its DRAM channel.
//
// Read side: word read requests from NC NeuraCores are taken one per cycle by a
// round-robin arbiter into a read buffer of RQ entries. The controller issues
// one 128-bit line read per cycle for the oldest (lowest-numbered) request not
// yet issued and, in the same step, marks every other waiting request to the
// same line as served by that transaction: requests for contiguous words are
// coalesced into one DRAM access, as the paper describes. Returning lines enter
// a response queue; each cycle one waiting request of the head line is answered
// with its word (routed to its core), and the line is dropped once no request
// waits for it. The number of reads in flight is limited to the queue depth so
// a returning line always has room.
// Write side: evicted hash-lines from NM NeuraMems are merged by a round-robin
// arbiter into a write queue and issued as single-word line writes (one word
// enable set).
//
// The paper names coalescing and reordering for spatial locality and buffers
// for reads and writes; the buffer sizes, oldest-first issue order and
// separate read and write channels are choices of this implementation.
// DRAM interface: rd_* request (line address) with valid/ready, rd_resp_*
// without back-pressure carrying line address and data; wr_* with valid/ready.
module mem_controller
  import neurachip_pkg::*;
#(
  parameter int unsigned NC    = 4,
  parameter int unsigned NM    = 4,
  parameter int unsigned RQ    = 16,
  parameter int unsigned RESPQ = 8,
  parameter int unsigned WQ    = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [NC-1:0] creq_valid,
  output logic [NC-1:0] creq_ready,
  input  rd_req_t      creq      [NC],
  output logic [NC-1:0] cresp_valid,
  output rd_resp_t     cresp,
  input  logic [NM-1:0] mwr_valid,
  output logic [NM-1:0] mwr_ready,
  input  wr_req_t      mwr       [NM],
  // DRAM channel
  output logic               rd_valid,
  input  logic               rd_ready,
  output logic [LINE_AW-1:0] rd_line,
  input  logic               rd_resp_valid,
  input  logic [LINE_AW-1:0] rd_resp_line,
  input  logic [LINE_W-1:0]  rd_resp_data,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [LINE_AW-1:0] wr_line,
  output logic [LINE_W-1:0]  wr_data,
  output logic [3:0]         wr_be,
  output logic               idle,
  output logic               stat_coalesced,
  output logic               stat_line_read
);
  localparam int unsigned CB = (NC > 1) ? $clog2(NC) : 1;
  localparam int unsigned MB = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned QB = $clog2(RQ);
  localparam int unsigned RB = $clog2(RESPQ + 1);

  // ---- read buffer
  logic [RQ-1:0] e_valid, e_issued;
  logic [31:0]   e_addr [RQ];
  logic [10:0]   e_meta [RQ];
  logic [CB-1:0] e_core [RQ];

  // accept: round-robin over cores into the lowest free entry
  logic [CB-1:0] c_rr, c_sel;
  logic          c_any, has_free;
  logic [QB-1:0] free_e;
  always_comb begin
    has_free = 1'b0;
    free_e = '0;
    for (int e = RQ - 1; e >= 0; e--)
      if (!e_valid[e]) begin
        has_free = 1'b1;
        free_e = QB'(e);
      end
    c_any = 1'b0;
    c_sel = c_rr;
    for (int k = 0; k < NC; k++) begin
      int i;
      i = (int'(c_rr) + k) % NC;
      if (!c_any && creq_valid[i]) begin
        c_any = 1'b1;
        c_sel = CB'(i);
      end
    end
  end
  for (genvar c = 0; c < NC; c++) begin : g_crdy
    assign creq_ready[c] = has_free && c_any && (c_sel == CB'(c));
  end
  wire accept = c_any && has_free;

  // issue: oldest-first line read, coalescing same-line requests
  logic          iss_any;
  logic [QB-1:0] iss_e;
  logic [LINE_AW-1:0] iss_line;
  logic [RQ-1:0] iss_mask;
  logic [RB-1:0] inflight, rq_count;
  logic          credit;
  always_comb begin
    iss_any = 1'b0;
    iss_e = '0;
    for (int e = RQ - 1; e >= 0; e--)
      if (e_valid[e] && !e_issued[e]) begin
        iss_any = 1'b1;
        iss_e = QB'(e);
      end
    iss_line = e_addr[iss_e][31:2];
    for (int e = 0; e < RQ; e++)
      iss_mask[e] = e_valid[e] && !e_issued[e] && (e_addr[e][31:2] == iss_line);
  end
  assign credit   = (32'(inflight) + 32'(rq_count)) < RESPQ;
  assign rd_valid = iss_any && credit;
  assign rd_line  = iss_line;
  wire   issue    = rd_valid && rd_ready;
  assign stat_line_read = issue;
  assign stat_coalesced = issue && ($countones(iss_mask) > 1);

  // response queue and serving
  logic              rq_valid, rq_pop;
  logic [LINE_AW+LINE_W-1:0] rq_head;
  logic [LINE_AW-1:0] h_line;
  logic [LINE_W-1:0]  h_data;
  sync_fifo #(.W(LINE_AW + LINE_W), .DEPTH(RESPQ)) u_respq (
    .clk, .rst_n,
    .in_valid(rd_resp_valid), .in_ready(), .in_data({rd_resp_line, rd_resp_data}),
    .out_valid(rq_valid), .out_ready(rq_pop), .out_data(rq_head), .count(rq_count)
  );
  assign {h_line, h_data} = rq_head;

  logic          srv_any;
  logic [QB-1:0] srv_e;
  always_comb begin
    srv_any = 1'b0;
    srv_e = '0;
    for (int e = RQ - 1; e >= 0; e--)
      if (rq_valid && e_valid[e] && e_issued[e] && (e_addr[e][31:2] == h_line)) begin
        srv_any = 1'b1;
        srv_e = QB'(e);
      end
    rq_pop = rq_valid && !srv_any;
    cresp.meta = e_meta[srv_e];
    cresp.data = h_data[32*e_addr[srv_e][1:0] +: 32];
    cresp_valid = '0;
    cresp_valid[e_core[srv_e]] = srv_any;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid  <= '0;
      e_issued <= '0;
      c_rr     <= '0;
      inflight <= '0;
    end else begin
      if (issue) e_issued <= e_issued | iss_mask;
      if (srv_any) begin
        e_valid[srv_e]  <= 1'b0;
        e_issued[srv_e] <= 1'b0;
      end
      if (accept) begin
        e_valid[free_e]  <= 1'b1;
        e_issued[free_e] <= 1'b0;
        c_rr <= CB'((int'(c_sel) + 1) % NC);
      end
      case ({issue, rd_resp_valid})
        2'b10:   inflight <= inflight + 1'b1;
        2'b01:   inflight <= inflight - 1'b1;
        default: inflight <= inflight;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      e_addr[free_e] <= creq[c_sel].addr;
      e_meta[free_e] <= creq[c_sel].meta;
      e_core[free_e] <= c_sel;
    end
  end

  // ---- write path
  logic [MB-1:0] m_rr, m_sel;
  logic          m_any, wq_in_ready, wq_valid;
  wr_req_t       wq_head;
  logic [$clog2(WQ+1)-1:0] wq_count;
  always_comb begin
    m_any = 1'b0;
    m_sel = m_rr;
    for (int k = 0; k < NM; k++) begin
      int i;
      i = (int'(m_rr) + k) % NM;
      if (!m_any && mwr_valid[i]) begin
        m_any = 1'b1;
        m_sel = MB'(i);
      end
    end
  end
  for (genvar m = 0; m < NM; m++) begin : g_mrdy
    assign mwr_ready[m] = m_any && wq_in_ready && (m_sel == MB'(m));
  end
  sync_fifo #(.W($bits(wr_req_t)), .DEPTH(WQ)) u_wq (
    .clk, .rst_n,
    .in_valid(m_any), .in_ready(wq_in_ready), .in_data(mwr[m_sel]),
    .out_valid(wq_valid), .out_ready(wr_ready), .out_data(wq_head), .count(wq_count)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_rr <= '0;
    else if (m_any && wq_in_ready) m_rr <= MB'((int'(m_sel) + 1) % NM);
  end
  assign wr_valid = wq_valid;
  assign wr_line  = wq_head.addr[31:2];
  assign wr_be    = 4'b0001 << wq_head.addr[1:0];
  assign wr_data  = {4{wq_head.data}};

  assign idle = (e_valid == '0) && (inflight == '0) && (rq_count == '0) && (wq_count == '0);

  assert property (@(posedge clk) disable iff (!rst_n) rd_resp_valid |-> (inflight != '0))
    else $error("mem_controller: unexpected DRAM response");
endmodule
