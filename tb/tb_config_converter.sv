// tb_config_converter: streams random configuration words through the
// conversion unit under random valid and ready, for random migration
// functions, mesh sizes and source PEs, and compares every output packet
// with a scoreboard filled from the reference model (destination = f(src),
// address field of is_addr words = f(address), other words unchanged). It
// also checks the one-cycle latency and one-word-per-cycle throughput with
// the output always ready.
module tb_config_converter;
  import mig_pkg::*;
  import tb_mig_model_pkg::*;

  logic      clk = 0, rst_n = 0;
  mig_func_e func;
  coord_t    n_m1, offset;
  pos_t      src_pos;
  logic      in_valid, in_ready, out_valid, out_ready, busy;
  cfg_word_t in_word;
  pkt_t      out_pkt;
  int        checks = 0, failures = 0;
  int        cycle = 0;

  config_converter dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pkt_t exp_q[$];
  int   in_cyc_q[$];
  bit   rand_ready;

  // expected packet for the current inputs
  function automatic pkt_t expect_pkt(cfg_word_t w);
    pkt_t p;
    int dx, dy, ax, ay;
    ref_remap(int'(func), int'(n_m1) + 1, int'(offset), int'(src_pos.x), int'(src_pos.y), dx, dy);
    p = '0;
    p.dst = mkpos(dx, dy);
    p.src = src_pos;
    p.last = w.last;
    p.is_addr = w.is_addr;
    p.data = w.data;
    if (w.is_addr) begin
      ref_remap(int'(func), int'(n_m1) + 1, int'(offset),
                int'(w.data[2:0]), int'(w.data[5:3]), ax, ay);
      p.data[5:0] = {3'(ay), 3'(ax)};
    end
    return p;
  endfunction

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      exp_q.push_back(expect_pkt(in_word));
      in_cyc_q.push_back(cycle);
    end
    if (rst_n && out_valid && out_ready) begin
      pkt_t e;
      int   c;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected packet");
      end else begin
        e = exp_q.pop_front();
        c = in_cyc_q.pop_front();
        if (out_pkt != e) begin
          failures++;
          $display("FAIL pkt %p expected %p", out_pkt, e);
        end
        if (!rand_ready) begin
          checks++;
          if (cycle - c != 1) begin failures++; $display("FAIL latency %0d", cycle - c); end
        end
      end
    end
  end

  task automatic run_pe(int words, bit gaps);
    int n, k;
    n = int'(n_m1) + 1;
    k = 0;
    while (k < words) begin
      in_valid <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
      in_word.last    <= (k == words - 1);
      in_word.is_addr <= ($urandom_range(0, 2) == 0);
      in_word.data    <= {$urandom} & ~32'h3f | 32'({3'($urandom_range(0, n - 1)),
                                                    3'($urandom_range(0, n - 1))});
      @(posedge clk);
      if (in_valid && in_ready) k++;
    end
    in_valid <= 1'b0;
    // let the stage drain before inputs change
    while (busy || exp_q.size() != 0) @(posedge clk);
  endtask

  initial begin
    int start, n;
    in_valid = 0; out_ready = 1; rand_ready = 0;
    in_word = '0; func = MIG_ROT; n_m1 = 3'd4; offset = '0; src_pos = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // random phase
    rand_ready = 1;
    for (int t = 0; t < 300; t++) begin
      n = $urandom_range(1, 8);
      n_m1    <= coord_t'(n - 1);
      func    <= mig_func_e'($urandom_range(0, 4));
      offset  <= coord_t'($urandom_range(0, n - 1));
      src_pos <= mkpos($urandom_range(0, n - 1), $urandom_range(0, n - 1));
      @(posedge clk);
      run_pe($urandom_range(1, 12), 1);
    end
    // throughput phase: output always ready, 50 words back to back
    rand_ready = 0;
    @(posedge clk);
    start = cycle;
    run_pe(50, 0);
    checks++;
    if (checks < 100) begin failures++; $display("FAIL too few packets"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) out_ready <= rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
endmodule
