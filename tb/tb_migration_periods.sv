// tb_migration_periods: runs the migration top level, at its default
// parameters, with the three migration periods of the published evaluation
// (109, 437.2 and 874.4 us) and measures the share of cycles the PEs spend
// halted, which is the throughput cost of migration.
// Assumptions of this test, not of the design: a 100 MHz clock (so the
// periods are 10900, 43720 and 87440 cycles), a 5x5 mesh, 6 words of
// configuration and state per PE, an ideal PE array without gaps and a
// network that accepts every packet and delivers it one cycle later. Under
// these assumptions every migration must halt the mesh for the same number
// of cycles (deterministic migration time), that number must be
// 1 + 25*6 + D + 1 with a constant drain D, and the cost must fall in
// inverse proportion to the period: with about 1.4 % at 109 us it must be
// below 0.4 % at 437.2 us and below 0.2 % at 874.4 us, as published.
module tb_migration_periods;
  import mig_pkg::*;

  localparam int W = 6;
  localparam int N = 5;

  logic        clk = 0, rst_n = 0;
  logic        mig_enable;
  logic [31:0] period_cycles;
  mig_func_e   func_cfg, act_func;
  coord_t      offset_cfg, n_m1_cfg;
  logic        block_done, halt, unload_req, pe_word_valid, pe_word_ready, commit;
  pos_t        unload_pos;
  cfg_word_t   pe_word;
  logic        mig_pkt_valid, mig_pkt_ready, net_idle;
  pkt_t        mig_pkt;
  logic        ext_in_valid, ext_in_ready, net_in_valid, net_in_ready;
  logic        net_out_valid, net_out_ready, ext_out_valid, ext_out_ready;
  pkt_t        ext_in_pkt, net_in_pkt, net_out_pkt, ext_out_pkt;
  logic        mig_pending;
  logic [15:0] mig_count;

  int checks = 0, failures = 0;

  noc_migration_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ideal PE array: every PE streams W words, last one flagged
  int ptr = 0;
  logic inflight = 0;
  assign pe_word_valid = unload_req;
  always_comb begin
    pe_word = '0;
    pe_word.last = (ptr == W - 1);
    pe_word.data = 32'(ptr);
  end
  assign mig_pkt_ready = 1'b1;
  assign net_idle      = !inflight;

  // PEs finish a message block every 100 cycles while running
  int blk = 0;
  int halted = 0, total = 0, run_len = 0, per_mig = -1;
  bit counting = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (pe_word_valid && pe_word_ready) ptr <= pe_word.last ? 0 : ptr + 1;
      inflight   <= mig_pkt_valid && mig_pkt_ready;
      block_done <= 1'b0;
      if (!halt) begin
        if (blk == 99) begin blk <= 0; block_done <= 1'b1; end else blk <= blk + 1;
      end
      if (counting) begin
        total++;
        if (halt) begin halted++; run_len++; end
        else if (run_len != 0) begin
          checks++;
          if (per_mig < 0) per_mig = run_len;
          else if (run_len != per_mig) begin
            failures++; $display("FAIL migration took %0d cycles, earlier %0d", run_len, per_mig);
          end
          run_len = 0;
        end
      end
    end
  end

  real cost [3];

  initial begin
    int periods [3] = '{10900, 43720, 87440};
    mig_enable = 0; func_cfg = MIG_XYSHIFT; offset_cfg = 3'd1; n_m1_cfg = coord_t'(N - 1);
    block_done = 0;
    ext_in_valid = 0; net_in_ready = 1; net_out_valid = 0; ext_out_ready = 1;
    ext_in_pkt = '0; net_out_pkt = '0;
    foreach (periods[i]) begin
      rst_n = 0; mig_enable = 0;
      period_cycles = periods[i];
      repeat (3) @(posedge clk);
      rst_n = 1;
      @(negedge clk);
      mig_enable = 1;
      halted = 0; total = 0; counting = 1;
      // four periods, plus time for the fourth migration to finish
      repeat (4 * periods[i] + 400) @(posedge clk);
      counting = 0;
      checks++;
      if (mig_count != 4) begin failures++; $display("FAIL %0d migrations in 4 periods", mig_count); end
      cost[i] = 100.0 * halted / (4.0 * periods[i]);
      $display("period %0d cycles: %0d migrations, halted %0d cycles in 4 periods = %0.3f %%",
               periods[i], mig_count, halted, cost[i]);
    end
    checks++;
    if (per_mig < 1 + N * N * W + 1 + 1 || per_mig > 1 + N * N * W + 4 + 1) begin
      failures++; $display("FAIL halt per migration %0d", per_mig);
    end
    checks++;
    if (!(cost[0] < 1.6 && cost[1] < 0.4 && cost[2] < 0.2)) begin
      failures++; $display("FAIL throughput cost not below 1.6 / 0.4 / 0.2 %%");
    end
    checks++;
    if (cost[0] / cost[1] < 3.9 || cost[0] / cost[1] > 4.1 ||
        cost[0] / cost[2] < 7.8 || cost[0] / cost[2] > 8.2) begin
      failures++; $display("FAIL cost not inversely proportional to period");
    end
    $display("halt per migration %0d cycles", per_mig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
