// dram_channel_model: behavioural model of one DRAM/HBM channel, for
// simulation only (not synthesizable, not part of the design).
//
// Word-addressed storage is the shared array of dram_backing_pkg (unwritten
// words read as zero), so every channel sees the same contents; 128-bit lines
// of four words. A line read is accepted every cycle
// and answered exactly LAT cycles later, in order. Writes take effect when
// accepted, with one enable per 32-bit word. Testbenches load and inspect the
// contents with poke() and peek(); nwrites counts accepted line writes.
module dram_channel_model #(
  parameter int unsigned LAT = 20
) (
  input  logic         clk,
  input  logic         rd_valid,
  output logic         rd_ready,
  input  logic [29:0]  rd_line,
  output logic         rd_resp_valid,
  output logic [29:0]  rd_resp_line,
  output logic [127:0] rd_resp_data,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [29:0]  wr_line,
  input  logic [127:0] wr_data,
  input  logic [3:0]   wr_be
);
  import dram_backing_pkg::*;
  int unsigned nwrites = 0;
  longint unsigned cyc = 0;
  typedef struct { longint unsigned due; logic [29:0] line; } pend_t;
  pend_t q [$];


  assign rd_ready = 1'b1;
  assign wr_ready = 1'b1;

  initial begin
    rd_resp_valid = 1'b0;
    rd_resp_line  = '0;
    rd_resp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rd_resp_valid <= 1'b0;
    if (q.size() > 0 && q[0].due <= cyc) begin
      pend_t p;
      p = q.pop_front();
      rd_resp_valid <= 1'b1;
      rd_resp_line  <= p.line;
      for (int w = 0; w < 4; w++) rd_resp_data[32*w +: 32] <= peek({p.line, 2'(w)});
    end
    if (rd_valid) begin
      pend_t n;
      n.due = cyc + LAT;
      n.line = rd_line;
      q.push_back(n);
    end
    if (wr_valid) begin
      nwrites <= nwrites + 1;
      for (int w = 0; w < 4; w++)
        if (wr_be[w]) poke({wr_line, 2'(w)}, wr_data[32*w +: 32]);
    end
  end
endmodule
