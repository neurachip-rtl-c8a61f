// tb_neuracore_pipeline: self-checking test of one NeuraCore MMH4 pipeline.
//
// A behavioural operand memory answers the pipeline's word requests after a
// random delay and in random order. Random MMH4 instructions (with some
// TAG_NONE slots) are allocated whenever a register slot is free, and the
// output consumer applies random back-pressure. Every HACC is checked against
// the product A[i]*B[j], TAG and COUNTER computed from the memory contents;
// each expected HACC must appear exactly once. Also checks that the
// scoreboard never exceeds REGS slots and that skipped products emit nothing.
module tb_neuracore_pipeline;
  import neurachip_pkg::*;
  localparam int REGS = 4;
  localparam int NINSTR = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic alloc_valid, alloc_ready;
  mmh4_t alloc_instr;
  logic req_valid, req_fire;
  logic [1:0] req_slot;
  logic [5:0] req_idx;
  logic [31:0] req_addr;
  logic resp_valid;
  logic [1:0] resp_slot;
  logic [5:0] resp_idx;
  logic [31:0] resp_data;
  logic out_valid, out_ready;
  hacc_t out_hacc;
  logic [REGS-1:0] scoreboard;
  logic [2:0] occupancy;

  neuracore_pipeline #(.REGS(REGS)) dut (.*);

  int checks = 0, failures = 0;

  // operand memory: word address -> value, filled on first use
  logic [31:0] mem [logic [31:0]];
  function automatic logic [31:0] rd(input logic [31:0] a);
    if (!mem.exists(a)) mem[a] = $urandom;
    return mem[a];
  endfunction

  // pending responses
  typedef struct { logic [1:0] slot; logic [5:0] idx; logic [31:0] data; int due; } pend_t;
  pend_t pq [$];
  int cyc = 0;

  // expected HACCs by tag (tags are unique)
  logic [63:0] expct [logic [31:0]];
  int n_made = 0;
  int n_expected = 0, n_seen = 0, n_skip = 0;
  logic [31:0] next_tag = 32'h100;

  task automatic make_instr(output mmh4_t m);
    logic [31:0] base;
    base = 32'h4000 * (1 + $urandom_range(0, 7));
    m.opcode = OP_MMH4;
    m.base = base;
    m.a_data = 22'($urandom_range(0, 255));
    m.b_col_ind = 22'(256 + 16 * n_made);   // private TAG block per instruction
    n_made++;
    m.b_data = 22'($urandom_range(2048, 2300));
    m.roll_counter = 22'(4096 + 16 * $urandom_range(0, 63));
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        logic [31:0] ta;
        ta = base + m.b_col_ind + 4 * i + j;
        if ($urandom_range(0, 5) == 0) begin
          mem[ta] = TAG_NONE;
          n_skip++;
        end else begin
          logic [31:0] a, b, c;
          mem[ta] = next_tag;
          a = rd(base + m.a_data + i);
          b = rd(base + m.b_data + j);
          c = rd(base + m.roll_counter + 4 * i + j);
          expct[next_tag] = {a * b, c};
          next_tag++;
          n_expected++;
        end
      end
  endtask

  // driver / responder, changes at negedge and decisions after #1
  initial begin
    int sent;
    bit have;
    mmh4_t m_pend;
    sent = 0;
    have = 0;
    m_pend = '0;
    alloc_valid = 0; alloc_instr = '0; req_fire = 0; resp_valid = 0;
    resp_slot = 0; resp_idx = 0; resp_data = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    forever begin
      @(negedge clk);
      cyc++;
      // retire the allocation / request of the previous cycle
      alloc_valid = 0;
      req_fire = 0;
      // one response per cycle, picked at random among due ones
      resp_valid = 0;
      if (pq.size() > 0) begin
        int k;
        k = $urandom_range(0, pq.size() - 1);
        if (pq[k].due <= cyc) begin
          resp_valid = 1; resp_slot = pq[k].slot; resp_idx = pq[k].idx; resp_data = pq[k].data;
          pq.delete(k);
        end
      end
      out_ready = ($urandom_range(0, 3) != 0);
      if (!have && n_made < NINSTR && $urandom_range(0, 2) == 0) begin
        make_instr(m_pend);
        have = 1;
      end
      alloc_valid = have;
      alloc_instr = m_pend;
      #1;
      if (have && alloc_ready) begin sent++; have = 0; end
      if (req_valid && $urandom_range(0, 3) != 0) begin
        req_fire = 1;
        pq.push_back('{req_slot, req_idx, rd(req_addr), cyc + $urandom_range(1, 12)});
      end
      if (sent == NINSTR && n_seen == n_expected && pq.size() == 0 && occupancy == 0) break;
    end
    checks++;
    if (expct.num() != 0) begin failures++; $display("FAIL %0d HACCs never produced", expct.num()); end
    checks++;
    if (n_skip == 0) begin failures++; $display("FAIL no TAG_NONE slot exercised"); end
    $display("pipeline: %0d instrs, %0d HACCs, %0d skipped slots, %0d cycles", sent, n_seen, n_skip, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      n_seen++;
      checks++;
      if (out_hacc.opcode != OP_HACC || !expct.exists(out_hacc.tag)) begin
        failures++;
        $display("FAIL unexpected HACC tag %h", out_hacc.tag);
      end else if (expct[out_hacc.tag] != {out_hacc.data, out_hacc.counter}) begin
        failures++;
        $display("FAIL HACC tag %h data %h ctr %h", out_hacc.tag, out_hacc.data, out_hacc.counter);
      end else expct.delete(out_hacc.tag);
    end
    if (out_valid && out_hacc.tag == TAG_NONE) begin
      checks++; failures++; $display("FAIL TAG_NONE emitted");
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
