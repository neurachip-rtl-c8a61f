// tb_dispatcher: self-checking test of the MMH4 dispatcher.
//
// Eight cores with random loads and random ready signals. Checks, every
// cycle, that at most one core is offered the instruction, that it is the
// ready core with the lowest load (lowest number on a tie), that the host
// sees ready only when a core can take the instruction, and that the
// instruction is passed unchanged. Then checks the reseed protocol: after a
// reseed request nothing is issued, the reseed pulse waits until the chip is
// idle, lasts one cycle, and issue resumes afterwards.
module tb_dispatcher;
  import neurachip_pkg::*;
  localparam int NC = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, reseed_req, chip_idle, reseed, busy, stat_issue, stat_reseed;
  mmh4_t in_instr, core_instr;
  logic [NC-1:0] core_valid, core_ready;
  logic [7:0] core_load [NC];

  dispatcher #(.NCORES(NC)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check_issue();
    int best;
    best = -1;
    for (int c = 0; c < NC; c++)
      if (core_ready[c] && (best < 0 || core_load[c] < core_load[best])) best = c;
    checks++;
    if (best < 0) begin
      if (in_ready || core_valid != '0) begin failures++; $display("FAIL issue with no ready core"); end
    end else if (in_ready !== 1'b1 || core_valid !== (NC'(in_valid) << best) || core_instr !== in_instr) begin
      failures++;
      $display("FAIL expected core %0d, valid %b ready %b", best, core_valid, in_ready);
    end
  endtask

  initial begin
    int waited;
    in_valid = 0; in_instr = '0; reseed_req = 0; chip_idle = 1; core_ready = '0;
    for (int c = 0; c < NC; c++) core_load[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (300) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 3) != 0;
      in_instr = {$urandom, $urandom, $urandom, $urandom};
      core_ready = NC'($urandom);
      for (int c = 0; c < NC; c++) core_load[c] = 8'($urandom_range(0, 6));
      #1;
      check_issue();
    end
    // reseed: chip busy for a while
    @(negedge clk);
    core_ready = '1;
    in_valid = 1;
    reseed_req = 1;
    chip_idle = 0;
    @(negedge clk);
    reseed_req = 0;
    waited = 0;
    repeat (10) begin
      #1;
      checks++;
      if (in_ready || core_valid != '0 || reseed) begin
        failures++; $display("FAIL issue or reseed while waiting for idle");
      end
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low during reseed wait"); end
      @(negedge clk);
    end
    chip_idle = 1;
    @(negedge clk);
    #1;
    checks++;
    if (!reseed || !stat_reseed) begin failures++; $display("FAIL no reseed pulse after idle"); end
    @(negedge clk);
    #1;
    checks++;
    if (reseed) begin failures++; $display("FAIL reseed pulse longer than one cycle"); end
    check_issue();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
