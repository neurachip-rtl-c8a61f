// sync_fifo: synchronous first-in first-out buffer with valid/ready handshakes.
//
// Used for every instruction buffer, packet buffer and request buffer in the
// design. A word is written when in_valid && in_ready and read when
// out_valid && out_ready; a write into a full buffer is refused (in_ready low)
// unless FULL_PASS is set, in which case a full buffer accepts a write in the
// cycle it is read (in_ready then depends combinationally on out_ready).
// Data is available at the output the cycle after it was written. count gives
// the occupancy. Depth is any value >= 1.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4,
  parameter bit          FULL_PASS = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]) || (FULL_PASS && out_ready);
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd_ptr];
  assign count     = cnt;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt) <= DEPTH);
endmodule
