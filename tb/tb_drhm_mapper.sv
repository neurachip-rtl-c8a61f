// tb_drhm_mapper: self-checking test of the DRHM mapper.
//
// Computes the expected seed table independently (the LFSR recurrence, seeds
// forced odd) and the expected NeuraMem of random TAGs with the hash
// ((TAG << 16) >> 16) * gamma mod 32. Checks that the table is ready exactly
// NSEEDS cycles (one entry per cycle) after reset and after a reseed, that the reseed loads the
// following LFSR values, and that the mapping changes with the seed.
module tb_drhm_mapper;
  localparam int NSEEDS = 8;
  localparam logic [31:0] INIT = 32'hACE1_2468;

  logic clk = 1'b0, rst_n = 1'b0, reseed = 1'b0, ready;
  logic [31:0] tag, gamma;
  logic [7:0]  nm_id;
  always #5 clk = ~clk;

  drhm_mapper #(.N(32), .K(16), .ROW_SHIFT(8), .NSEEDS(NSEEDS), .LFSR_INIT(INIT)) dut (
    .clk, .rst_n, .reseed, .ready, .tag, .nm_id, .gamma
  );

  int checks = 0, failures = 0;
  logic [31:0] lfsr = INIT;
  logic [31:0] seeds [NSEEDS];
  int hist [32];

  function automatic logic [31:0] nxt(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  task automatic fill_ref();
    for (int i = 0; i < NSEEDS; i++) begin
      seeds[i] = lfsr | 32'd1;
      lfsr = nxt(lfsr);
    end
  endtask

  task automatic wait_ready();
    int n;
    n = 0;
    @(negedge clk);
    while (!ready) begin
      @(negedge clk);
      n++;
    end
    checks++;
    if (n > NSEEDS || n < NSEEDS - 1) begin failures++; $display("FAIL table ready after %0d cycles", n); end
  endtask

  task automatic check_tags(input int cnt);
    for (int i = 0; i < cnt; i++) begin
      logic [31:0] t, g, h;
      t = $urandom;
      tag = t;
      #1;
      g = seeds[(t >> 8) % NSEEDS];
      h = (((t << 16) >> 16) * g) % 32;
      checks++;
      if (gamma != g || nm_id != h[7:0]) begin
        failures++;
        $display("FAIL tag %h: gamma %h/%h nm %0d/%0d", t, gamma, g, nm_id, h);
      end
      hist[nm_id[4:0]]++;
    end
  endtask

  initial begin
    logic [7:0] prev_nm [16];
    tag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    fill_ref();
    wait_ready();
    check_tags(200);
    for (int i = 0; i < 16; i++) begin
      tag = 32'h0010_0000 + 256 * i + 3;
      #1;
      prev_nm[i] = nm_id;
    end
    @(negedge clk);
    reseed = 1'b1;
    @(negedge clk);
    reseed = 1'b0;
    fill_ref();
    begin
      int n;
      n = 1;
      while (!ready) begin @(negedge clk); n++; end
      checks++;
      if (n > NSEEDS + 1 || n < NSEEDS) begin failures++; $display("FAIL reseed took %0d cycles", n); end
    end
    check_tags(200);
    begin
      int changed;
      changed = 0;
      for (int i = 0; i < 16; i++) begin
        tag = 32'h0010_0000 + 256 * i + 3;
        #1;
        if (nm_id != prev_nm[i]) changed++;
      end
      checks++;
      if (changed == 0) begin failures++; $display("FAIL reseed did not change the mapping"); end
    end
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
