// tb_neuracore: self-checking test of one NeuraCore.
//
// Random MMH4 instructions (some product slots marked TAG_NONE) are offered
// to the core; a behavioural memory answers its word reads after a random
// delay and in random order, with random request back-pressure; the HACC
// output sees random back-pressure. Checks every HACC against A[i]*B[j], TAG
// and COUNTER computed from the memory contents, and its NeuraMem ID against
// an independent model of the DRHM mapping (seed table from the LFSR,
// ((TAG << 16) >> 16) * gamma mod 32); each expected HACC must appear once.
// Also checks that all four pipelines were used and that the core reports
// idle and zero load when done.
module tb_neuracore;
  import neurachip_pkg::*;
  localparam int NINSTR = 80, NSEEDS = 8;
  localparam logic [31:0] INIT = 32'hACE1_2468;

  logic clk = 1'b0, rst_n = 1'b0, reseed = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, mreq_valid, mreq_ready, mresp_valid, out_valid, out_ready, idle, stat_hacc;
  mmh4_t in_instr;
  logic [7:0] load;
  rd_req_t mreq;
  rd_resp_t mresp;
  hacc_t out_hacc;

  neuracore #(.PIPES(4), .REGS(8), .NAG(2), .IBUF(4), .N_MEMS(32), .DRHM_K(16),
              .ROW_SHIFT(8), .NSEEDS(NSEEDS)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] mem [logic [31:0]];
  logic [63:0] expct [logic [31:0]];
  logic [31:0] seeds [NSEEDS];
  int n_made = 0, n_expected = 0, n_seen = 0, n_skip = 0, cyc = 0;
  logic [31:0] next_tag = 32'h0001_0000;
  bit pipe_used [4];
  typedef struct { rd_resp_t r; int due; } pend_t;
  pend_t pq [$];

  function automatic logic [31:0] rd(input logic [31:0] a);
    if (!mem.exists(a)) mem[a] = $urandom;
    return mem[a];
  endfunction

  task automatic make_instr(output mmh4_t m);
    logic [31:0] base;
    base = 32'h10_0000;
    m.opcode = OP_MMH4;
    m.base = base;
    m.a_data = 22'($urandom_range(0, 255));
    m.b_col_ind = 22'(1024 + 16 * n_made);
    m.b_data = 22'($urandom_range(4096, 4400));
    m.roll_counter = 22'(8192 + 16 * $urandom_range(0, 63));
    n_made++;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        logic [31:0] ta;
        ta = base + m.b_col_ind + 4 * i + j;
        if ($urandom_range(0, 7) == 0) begin
          mem[ta] = TAG_NONE;
          n_skip++;
        end else begin
          logic [31:0] a, b, c;
          mem[ta] = next_tag;
          a = rd(base + m.a_data + i);
          b = rd(base + m.b_data + j);
          c = rd(base + m.roll_counter + 4 * i + j);
          expct[next_tag] = {a * b, c};
          next_tag += 32'd37;
          n_expected++;
        end
      end
  endtask

  initial begin
    logic [31:0] lfsr;
    bit have;
    mmh4_t m_pend;
    lfsr = INIT;
    for (int i = 0; i < NSEEDS; i++) begin
      seeds[i] = lfsr | 32'd1;
      lfsr = lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
    end
    have = 0; m_pend = '0;
    in_valid = 0; in_instr = '0; mreq_ready = 0; mresp_valid = 0; mresp = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    forever begin
      @(negedge clk);
      cyc++;
      mresp_valid = 0;
      if (pq.size() > 0) begin
        int k;
        k = $urandom_range(0, pq.size() - 1);
        if (pq[k].due <= cyc) begin
          mresp_valid = 1;
          mresp = pq[k].r;
          pq.delete(k);
        end
      end
      out_ready = ($urandom_range(0, 3) != 0);
      mreq_ready = ($urandom_range(0, 3) != 0);
      if (!have && n_made < NINSTR && $urandom_range(0, 1) == 0) begin
        make_instr(m_pend);
        have = 1;
      end
      in_valid = have;
      in_instr = m_pend;
      #1;
      if (have && in_ready) have = 0;
      if (mreq_valid && mreq_ready) begin
        pipe_used[mreq.meta[10:9]] = 1;
        pq.push_back('{'{data: rd(mreq.addr), meta: mreq.meta}, cyc + $urandom_range(2, 30)});
      end
      if (n_made == NINSTR && !have && n_seen == n_expected && pq.size() == 0 && idle) break;
    end
    checks++;
    if (expct.num() != 0) begin failures++; $display("FAIL %0d HACCs never produced", expct.num()); end
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (!pipe_used[p]) begin failures++; $display("FAIL pipeline %0d unused", p); end
    end
    checks++;
    if (load != 0) begin failures++; $display("FAIL load %0d when idle", load); end
    $display("neuracore: %0d instrs, %0d HACCs, %0d skipped, %0d cycles", n_made, n_seen, n_skip, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [31:0] g, h;
    n_seen++;
    checks++;
    g = seeds[(out_hacc.tag >> 8) % NSEEDS];
    h = (((out_hacc.tag << 16) >> 16) * g) % 32;
    if (out_hacc.opcode != OP_HACC || !expct.exists(out_hacc.tag)) begin
      failures++; $display("FAIL unexpected HACC tag %h", out_hacc.tag);
    end else begin
      if (expct[out_hacc.tag] != {out_hacc.data, out_hacc.counter}) begin
        failures++; $display("FAIL HACC tag %h data %h ctr %h", out_hacc.tag, out_hacc.data, out_hacc.counter);
      end
      if (out_hacc.nm_id != h[7:0]) begin
        failures++; $display("FAIL tag %h sent to NeuraMem %0d, expected %0d", out_hacc.tag, out_hacc.nm_id, h);
      end
      expct.delete(out_hacc.tag);
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
