// spgemm_tb_body.svh: shared body of the chip-level SpGEMM testbenches.
//
// The including module declares localparams TNT (tiles), NA, NK, NB (matrix
// sizes: A is NA x NK, B is NK x NB), DA, DB (percent density of A and B),
// RUNS (how many SpGEMMs, with a DRHM reseed between them), WATCHDOG (cycles),
// and instantiates the chip as `dut` on the signals declared here.
//
// The body plays the role of the compiler: it draws random sparse A and B
// with values 1..7, stores A in CSC order and B in CSR order in the DRAM
// store shared by all channels, cuts every column k of A into groups of up to four non-zeros and
// every row k of B likewise, and emits one MMH4 per (A group, B group) pair.
// Each MMH4 gets its own 16 TAG words (output word address
// OUT_BASE + 256*row + col, or all ones for unused pairs) and 16 rolling
// counter words (number of partial products of that output minus one). It
// then streams the instructions, waits for the chip to go idle, and compares
// every output word written to DRAM with C = A x B computed here.

  import neurachip_pkg::*;

  localparam int unsigned A_BASE   = 32'h0000_1000;
  localparam int unsigned B_BASE   = 32'h0000_8000;
  localparam int unsigned T_BASE   = 32'h0002_0000;
  localparam int unsigned OUT_BASE = 32'h0010_0000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid = 1'b0;
  logic               in_ready;
  mmh4_t              in_instr;
  logic               reseed_req = 1'b0;
  logic [TNT-1:0]     rd_valid, rd_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [29:0]        rd_line [TNT], rd_resp_line [TNT], wr_line [TNT];
  logic [127:0]       rd_resp_data [TNT], wr_data [TNT];
  logic [3:0]         wr_be [TNT];
  logic               idle;
  stats_t             stats;

  for (genvar t = 0; t < TNT; t++) begin : g_dram
    dram_channel_model #(.LAT(20)) u_dram (
      .clk,
      .rd_valid(rd_valid[t]), .rd_ready(rd_ready[t]), .rd_line(rd_line[t]),
      .rd_resp_valid(rd_resp_valid[t]), .rd_resp_line(rd_resp_line[t]),
      .rd_resp_data(rd_resp_data[t]),
      .wr_valid(wr_valid[t]), .wr_ready(wr_ready[t]), .wr_line(wr_line[t]),
      .wr_data(wr_data[t]), .wr_be(wr_be[t])
    );
  end

  int unsigned nout_total = 0;   // output non-zeros over all runs
  int unsigned npp_total  = 0;   // partial products over all runs
  int checks = 0;
  int failures = 0;
  longint unsigned cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  int unsigned a [NA][NK];
  int unsigned b [NK][NB];
  int unsigned cref [NA][NB];
  int unsigned npp  [NA][NB];
  mmh4_t prog [$];

  task automatic poke_every(input int unsigned addr, input logic [31:0] d);
    dram_backing_pkg::poke(addr, d);
  endtask

  function automatic logic [31:0] peek_sum(input int unsigned addr);
    return dram_backing_pkg::peek(addr);
  endfunction

  task automatic build(input int run);
    int unsigned ap, bp, n;
    int unsigned acol_r [$];
    int unsigned acol_p [$];
    int unsigned brow_c [$];
    int unsigned brow_p [$];
    int unsigned a_ptr [NK];
    int unsigned b_ptr [NK];
    prog.delete();
    for (int r = 0; r < NA; r++) for (int c = 0; c < NB; c++) begin
      cref[r][c] = 0;
      npp[r][c] = 0;
    end
    for (int r = 0; r < NA; r++) for (int k = 0; k < NK; k++)
      a[r][k] = ($urandom_range(99) < DA) ? $urandom_range(7, 1) : 0;
    for (int k = 0; k < NK; k++) for (int c = 0; c < NB; c++)
      b[k][c] = ($urandom_range(99) < DB) ? $urandom_range(7, 1) : 0;
    // CSC of A, CSR of B
    ap = 0;
    for (int k = 0; k < NK; k++) begin
      a_ptr[k] = ap;
      for (int r = 0; r < NA; r++) if (a[r][k] != 0) begin
        poke_every(A_BASE + ap, a[r][k]);
        ap++;
      end
    end
    bp = 0;
    for (int k = 0; k < NK; k++) begin
      b_ptr[k] = bp;
      for (int c = 0; c < NB; c++) if (b[k][c] != 0) begin
        poke_every(B_BASE + bp, b[k][c]);
        bp++;
      end
    end
    for (int r = 0; r < NA; r++) for (int c = 0; c < NB; c++)
      for (int k = 0; k < NK; k++) begin
        cref[r][c] += a[r][k] * b[k][c];
        if (a[r][k] != 0 && b[k][c] != 0) npp[r][c]++;
      end
    n = 0;
    for (int k = 0; k < NK; k++) begin
      acol_r.delete(); acol_p.delete(); brow_c.delete(); brow_p.delete();
      ap = a_ptr[k];
      for (int r = 0; r < NA; r++) if (a[r][k] != 0) begin acol_r.push_back(r); acol_p.push_back(ap); ap++; end
      bp = b_ptr[k];
      for (int c = 0; c < NB; c++) if (b[k][c] != 0) begin brow_c.push_back(c); brow_p.push_back(bp); bp++; end
      for (int gi = 0; gi < acol_r.size(); gi += 4)
        for (int gj = 0; gj < brow_c.size(); gj += 4) begin
          mmh4_t ins;
          int unsigned tb;
          tb = T_BASE + 32 * n;
          for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
            if (gi + i < acol_r.size() && gj + j < brow_c.size()) begin
              int unsigned r, c;
              r = acol_r[gi + i];
              c = brow_c[gj + j];
              poke_every(tb + 4 * i + j, OUT_BASE + 256 * r + c);
              poke_every(tb + 16 + 4 * i + j, npp[r][c] - 1);
            end else begin
              poke_every(tb + 4 * i + j, 32'hFFFF_FFFF);
              poke_every(tb + 16 + 4 * i + j, 0);
            end
          end
          ins.opcode       = OP_MMH4;
          ins.base         = 32'd0;
          ins.a_data       = 22'(A_BASE + acol_p[gi]);
          ins.b_col_ind    = 22'(tb);
          ins.b_data       = 22'(B_BASE + brow_p[gj]);
          ins.roll_counter = 22'(tb + 16);
          prog.push_back(ins);
          n++;
        end
    end
    $display("run %0d: %0d MMH4 instructions", run, prog.size());
  endtask

  task automatic check_results(input int run);
    int nout;
    nout = 0;
    for (int r = 0; r < NA; r++) for (int c = 0; c < NB; c++) begin
      logic [31:0] got;
      got = peek_sum(OUT_BASE + 256 * r + c);
      checks++;
      if (got != cref[r][c]) begin
        failures++;
        if (failures < 10)
          $display("FAIL run %0d C[%0d][%0d] got %0d expected %0d", run, r, c, got, cref[r][c]);
      end
      if (npp[r][c] != 0) nout++;
      npp_total += npp[r][c];
    end
    nout_total += nout;
    $display("run %0d: %0d output non-zeros checked", run, nout);
  endtask

  task automatic clear_outputs();
    for (int r = 0; r < NA; r++) for (int c = 0; c < NB; c++) poke_every(OUT_BASE + 256 * r + c, 0);
  endtask

  task automatic run_program(input int run);
    foreach (prog[i]) begin
      @(negedge clk);
      in_instr = prog[i];
      in_valid = 1'b1;
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    while (!idle) @(posedge clk);
  endtask

  int unsigned issued_before;
  initial begin
    in_instr = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < RUNS; run++) begin
      longint unsigned t0;
      build(run);
      clear_outputs();
      issued_before = stats.mmh4_issued;
      t0 = cycles;
      run_program(run);
      $display("run %0d finished in %0d cycles", run, cycles - t0);
      check_results(run);
      checks++;
      if (stats.mmh4_issued - issued_before != prog.size()) begin
        failures++;
        $display("FAIL issued count %0d != %0d", stats.mmh4_issued - issued_before, prog.size());
      end
      if (run + 1 < RUNS) begin
        reseed_req <= 1'b1;
        @(posedge clk);
        reseed_req <= 1'b0;
        repeat (2) @(posedge clk);
        while (!idle) @(posedge clk);
      end
    end
    $display("mechanisms: mmh4=%0d hacc=%0d merged=%0d evictions=%0d collision_cycles=%0d line_reads=%0d coalesced=%0d bubble_cycles=%0d reseeds=%0d",
             stats.mmh4_issued, stats.hacc_sent, stats.hacc_merged, stats.evictions,
             stats.collision_cyc, stats.line_reads, stats.coalesced, stats.bubble_cyc, stats.reseeds);
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired: mmh4=%0d hacc=%0d merged=%0d evictions=%0d collision_cycles=%0d line_reads=%0d",
             stats.mmh4_issued, stats.hacc_sent, stats.hacc_merged, stats.evictions,
             stats.collision_cyc, stats.line_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
