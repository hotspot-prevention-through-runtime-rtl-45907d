// tb_migration_controller: drives the migration controller with a model of
// N x N halted PEs that each stream W words (with optional gaps), a
// conversion unit modelled as a one-cycle stage and a network whose idle
// flag can be held low. It checks that a migration becomes pending exactly
// period_cycles after enable, waits for a block boundary, unloads the PEs in
// raster order, waits for the drain, pulses commit once, samples the
// function at the start only, and that without back-pressure halt lasts
// exactly 1 + N*N*W + 2 + 1 cycles (the drain takes two cycles with this
// converter model).
module tb_migration_controller;
  import mig_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        enable;
  logic [31:0] period_cycles;
  mig_func_e   func_cfg, act_func;
  coord_t      offset_cfg, n_m1_cfg, act_offset, act_n_m1;
  logic        block_done, halt, unload_req, word_fire, word_last;
  logic        conv_busy, net_idle, commit, pending;
  pos_t        unload_pos;
  logic [15:0] mig_count;
  int          checks = 0, failures = 0, cycle = 0;

  migration_controller dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PE model
  int  words_per_pe = 4;
  bit  gaps = 0;
  int  wcnt = 0;
  logic pe_valid;
  always_comb pe_valid = unload_req && (gaps ? ($urandom_range(0, 2) != 0) : 1'b1);
  assign word_fire = pe_valid;
  assign word_last = (wcnt == words_per_pe - 1);
  always @(posedge clk) begin
    if (word_fire) wcnt <= word_last ? 0 : wcnt + 1;
    conv_busy <= word_fire;
  end

  // expected raster order
  int ex_x = 0, ex_y = 0;
  int halt_cycles = 0, commits = 0;
  always @(posedge clk) if (rst_n) begin
    if (halt) halt_cycles++;
    if (commit) commits++;
    if (word_fire && word_last) begin
      checks++;
      if (unload_pos != {coord_t'(ex_y), coord_t'(ex_x)}) begin
        failures++;
        $display("FAIL unload order got (%0d,%0d) expected (%0d,%0d)",
                 unload_pos.x, unload_pos.y, ex_x, ex_y);
      end
      if (ex_x == int'(act_n_m1)) begin ex_x = 0; ex_y = (ex_y == int'(act_n_m1)) ? 0 : ex_y + 1; end
      else ex_x++;
    end
  end

  task automatic pulse_block();
    block_done <= 1; @(posedge clk); block_done <= 0;
  endtask

  task automatic wait_commit();
    while (!commit) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin
    int t0, n;
    enable = 0; period_cycles = 40; func_cfg = MIG_XSHIFT; offset_cfg = 3'd2;
    n_m1_cfg = 3'd4; block_done = 0; net_idle = 1; conv_busy = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // 1. block_done without a pending migration does nothing
    pulse_block();
    repeat (3) @(posedge clk);
    checks++;
    if (halt) begin failures++; $display("FAIL halt without pending"); end

    // 2. pending rises exactly period_cycles after enable
    enable <= 1;
    t0 = cycle;
    @(posedge clk);
    while (!pending) @(posedge clk);
    checks++;
    if (cycle - t0 != 40 + 1) begin
      failures++; $display("FAIL period: pending after %0d cycles", cycle - t0);
    end

    // 3. migration waits for the block boundary
    repeat (10) @(posedge clk);
    checks++;
    if (halt) begin failures++; $display("FAIL started before block_done"); end

    // 4. deterministic migration time, N=5, W=4, no back-pressure
    halt_cycles = 0;
    pulse_block();
    @(posedge clk);
    func_cfg <= MIG_ROT;                     // change during migration
    wait_commit();
    @(posedge clk);
    checks++;
    if (halt_cycles != 1 + 25 * 4 + 2 + 1) begin
      failures++; $display("FAIL halt lasted %0d cycles", halt_cycles);
    end
    checks++;
    if (act_func != MIG_XSHIFT || act_offset != 3'd2) begin
      failures++; $display("FAIL function not held during migration");
    end
    checks++;
    if (mig_count != 1 || commits != 1 || halt) begin
      failures++; $display("FAIL commit count %0d/%0d", mig_count, commits);
    end

    // 5. the new function is used by the next migration; drain waits for net_idle
    while (!pending) @(posedge clk);
    n_m1_cfg <= 3'd3; words_per_pe = 3; gaps = 1;
    net_idle <= 0;
    pulse_block();
    while (!unload_req) @(posedge clk);
    while (unload_req) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++;
    if (commit || !halt) begin failures++; $display("FAIL commit while network busy"); end
    net_idle <= 1;
    wait_commit();
    checks++;
    if (act_func != MIG_ROT || act_n_m1 != 3'd3 || mig_count != 2) begin
      failures++; $display("FAIL second migration settings");
    end

    // 6. a series of migrations with random PE gaps and mesh sizes
    for (int k = 0; k < 6; k++) begin
      while (!pending) @(posedge clk);
      n = $urandom_range(1, 8);
      n_m1_cfg <= coord_t'(n - 1);
      words_per_pe = $urandom_range(1, 5);
      @(posedge clk);
      pulse_block();
      wait_commit();
    end
    checks++;
    if (mig_count != 8 || commits != 8) begin
      failures++; $display("FAIL migration count %0d", mig_count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
