// tb_noc_migration_top: end-to-end test of the migration logic with every
// parameter at its default. Around the top sits a behavioural model of the
// PE array and the mesh network:
//   - each PE holds W = 3 configuration/state words: a tag naming the
//     logical workload, an address word pointing at the PE of its partner
//     workload (the one logically to its right), and one state word;
//   - the PEs pulse block_done every BLOCK cycles while running, and insert
//     random gaps in the word stream when unloaded (in "noisy" migrations);
//   - the network accepts migration packets under random back-pressure,
//     delivers them after LAT cycles into a receive buffer of the
//     destination PE, and reports net_idle when none is in flight; on commit
//     each PE's configuration is replaced by what it received.
// The testbench tracks, with its own reference model, where each logical
// workload should be after every migration and checks that (a) every PE
// received exactly one PE's words, (b) the tag, the remapped partner address
// and the state word are where the model says, (c) the I/O port sends a
// packet addressed to a logical workload to its current PE and gives packets
// leaving a PE its logical source address, and (d) in a migration without
// gaps or back-pressure the unload phase takes exactly N*N*W cycles. All
// five functions are exercised, on a 5x5 and a 4x4 mesh, and each mechanism
// (wait for block boundary, network back-pressure, PE gaps, drain wait, I/O
// stall during halt, function change during a migration) is counted and
// must occur at least once.
module tb_noc_migration_top;
  import mig_pkg::*;
  import tb_mig_model_pkg::*;

  localparam int W     = 3;
  localparam int BLOCK = 70;
  localparam int LAT   = 3;

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

  int checks = 0, failures = 0, cycle = 0;

  noc_migration_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- PE array and network model ----------------
  cfg_word_t cfg  [64][W];
  cfg_word_t rx   [64][$];
  pos_t      rx_src [64][$];
  int        ptr = 0, blk = 0;
  bit        noisy = 0, gap = 0, nready = 0;
  pkt_t      fly_pkt [$];
  int        fly_t   [$];

  assign pe_word_valid = unload_req && !gap;
  assign pe_word       = cfg[{unload_pos.y, unload_pos.x}][ptr];
  assign mig_pkt_ready = !nready;
  assign net_idle      = (fly_pkt.size() == 0);

  // mechanism counters
  int n_wait_block = 0, n_backpressure = 0, n_gap = 0, n_drain_wait = 0;
  int n_io_stall = 0, n_func_change = 0;
  int n_func [5] = '{0, 0, 0, 0, 0};
  int halt_cycles = 0, unload_cycles = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      ptr <= 0; blk <= 0;
    end else begin
      gap    <= noisy && ($urandom_range(0, 3) == 0);
      nready <= noisy && ($urandom_range(0, 2) == 0);
      // block boundaries while the PEs run
      block_done <= 1'b0;
      if (!halt) begin
        if (blk == BLOCK - 1) begin blk <= 0; block_done <= 1'b1; end
        else blk <= blk + 1;
      end
      if (pe_word_valid && pe_word_ready) ptr <= pe_word.last ? 0 : ptr + 1;
      // statistics
      if (mig_pending && !halt && !block_done) n_wait_block++;
      if (mig_pkt_valid && !mig_pkt_ready) n_backpressure++;
      if (unload_req && !pe_word_valid) n_gap++;
      if (halt && !unload_req && !commit && !net_idle) n_drain_wait++;
      if (halt && ext_in_valid) n_io_stall++;
      if (halt) halt_cycles++;
      if (unload_req) unload_cycles++;
      // network: accept, fly, deliver
      if (fly_t.size() != 0 && fly_t[0] <= cycle) begin
        pkt_t p;
        cfg_word_t w;
        p = fly_pkt.pop_front();
        void'(fly_t.pop_front());
        w.last = p.last; w.is_addr = p.is_addr; w.data = p.data;
        rx[{p.dst.y, p.dst.x}].push_back(w);
        rx_src[{p.dst.y, p.dst.x}].push_back(p.src);
      end
      if (mig_pkt_valid && mig_pkt_ready) begin
        fly_pkt.push_back(mig_pkt);
        fly_t.push_back(cycle + LAT);
      end
      if (commit) begin
        for (int i = 0; i < 64; i++) begin
          if (rx[i].size() != 0) begin
            checks++;
            if (rx[i].size() != W) begin
              failures++; $display("FAIL PE %0d received %0d words", i, rx[i].size());
            end
            for (int k = 1; k < rx[i].size(); k++)
              if (rx_src[i][k] != rx_src[i][0]) begin
                failures++; $display("FAIL PE %0d received words of two PEs", i);
              end
            for (int k = 0; k < W && k < rx[i].size(); k++) cfg[i][k] = rx[i][k];
            rx[i].delete();
            rx_src[i].delete();
          end
        end
      end
    end
  end

  // ---------------- reference placement ----------------
  int px [64], py [64];     // physical position of logical workload lx + 8*ly
  int st [64];              // its state word
  int n;

  function automatic int lid(int x, int y); return x + 8 * y; endfunction

  task automatic init_mesh(int nn);
    n = nn;
    for (int i = 0; i < 64; i++) begin
      px[i] = i % 8; py[i] = i / 8;
      st[i] = $urandom;
      cfg[i][0] = '{last: 1'b0, is_addr: 1'b0, data: 32'hA500_0000 | i};
      cfg[i][1] = '{last: 1'b0, is_addr: 1'b1,
                    data: (32'($urandom) & ~32'h3f) | 32'(lid(((i % 8) + 1) % nn, i / 8) & 32'h3f)};
      cfg[i][2] = '{last: 1'b1, is_addr: 1'b0, data: st[i]};
      rx[i].delete(); rx_src[i].delete();
    end
    for (int y = 0; y < nn; y++)
      for (int x = 0; x < nn; x++)
        cfg[x + 8 * y][1].data[5:0] = {3'(y), 3'(((x + 1) % nn))};
  endtask

  task automatic check_placement();
    for (int ly = 0; ly < n; ly++)
      for (int lx = 0; lx < n; lx++) begin
        int l, p, q;
        l = lid(lx, ly);
        p = lid(px[l], py[l]);
        q = lid((lx + 1) % n, ly);
        checks++;
        if (cfg[p][0].data != (32'hA500_0000 | l) || cfg[p][2].data != st[l] ||
            cfg[p][1].data[5:0] != {3'(py[q]), 3'(px[q])}) begin
          failures++;
          $display("FAIL workload (%0d,%0d) not found intact at PE (%0d,%0d)", lx, ly, px[l], py[l]);
        end
      end
  endtask

  task automatic check_io();
    for (int ly = 0; ly < n; ly++)
      for (int lx = 0; lx < n; lx++) begin
        int l;
        l = lid(lx, ly);
        @(negedge clk);
        ext_in_pkt = '0;  ext_in_pkt.dst = mkpos(lx, ly); ext_in_pkt.data = $urandom;
        net_out_pkt = '0; net_out_pkt.src = mkpos(px[l], py[l]);
        ext_in_valid = 1; net_out_valid = 1;
        #1;
        checks++;
        if (!net_in_valid || net_in_pkt.dst != mkpos(px[l], py[l]) ||
            !ext_out_valid || ext_out_pkt.src != mkpos(lx, ly)) begin
          failures++;
          $display("FAIL I/O translation for workload (%0d,%0d)", lx, ly);
        end
      end
    @(negedge clk);
    ext_in_valid = 0; net_out_valid = 0;
  endtask

  // run one migration with function f; returns after commit
  task automatic migrate(mig_func_e f, int off, bit change_midway);
    int fi, nx, ny, h0, u0;
    @(negedge clk);
    func_cfg = f; offset_cfg = coord_t'(off);
    while (!halt) @(negedge clk);
    fi = int'(func_cfg);          // the function in force when the migration began
    h0 = halt_cycles; u0 = unload_cycles;
    // try to inject I/O traffic during the halt: it must be stalled
    ext_in_valid = 1; ext_in_pkt = '0;
    #1;
    checks++;
    if (net_in_valid || ext_in_ready) begin failures++; $display("FAIL I/O not stalled"); end
    if (change_midway) begin
      func_cfg = mig_func_e'((fi + 1) % 5);
      n_func_change++;
    end
    while (!commit) @(negedge clk);
    ext_in_valid = 0;
    @(negedge clk);
    n_func[fi]++;
    for (int i = 0; i < 64; i++) begin
      if (px[i] < n && py[i] < n) begin
        ref_remap(fi, n, off, px[i], py[i], nx, ny);
        px[i] = nx; py[i] = ny;
      end
    end
    if (!noisy) begin
      checks++;
      if (unload_cycles - u0 != n * n * W) begin
        failures++; $display("FAIL unload took %0d cycles, expected %0d", unload_cycles - u0, n * n * W);
      end
    end
    checks++;
    if (act_func != mig_func_e'(fi)) begin failures++; $display("FAIL act_func"); end
    check_placement();
    check_io();
  endtask

  initial begin
    mig_enable = 0; period_cycles = 300; func_cfg = MIG_ROT; offset_cfg = 0;
    n_m1_cfg = 3'd4; block_done = 0;
    ext_in_valid = 0; net_in_ready = 1; net_out_valid = 0; ext_out_ready = 1;
    ext_in_pkt = '0; net_out_pkt = '0;

    // ---- 5x5 mesh (configurations C, D, E) ----
    init_mesh(5);
    repeat (3) @(posedge clk);
    rst_n = 1;
    check_io();
    mig_enable = 1;
    noisy = 0;
    migrate(MIG_ROT,     0, 0);
    migrate(MIG_XMIR,    0, 0);
    noisy = 1;
    migrate(MIG_XYMIR,   0, 0);
    migrate(MIG_XSHIFT,  2, 0);
    migrate(MIG_XYSHIFT, 1, 1);
    for (int k = 0; k < 4; k++) migrate(mig_func_e'($urandom_range(0, 4)), $urandom_range(0, 4), 0);
    checks++;
    if (mig_count != 9) begin failures++; $display("FAIL mig_count %0d", mig_count); end

    // ---- 4x4 mesh (configurations A, B) ----
    rst_n = 0; mig_enable = 0;
    n_m1_cfg = 3'd3;
    init_mesh(4);
    repeat (3) @(posedge clk);
    rst_n = 1;
    mig_enable = 1;
    noisy = 0;
    migrate(MIG_ROT, 0, 0);
    noisy = 1;
    for (int k = 0; k < 6; k++) migrate(mig_func_e'(k % 5), $urandom_range(0, 3), 0);

    // ---- mechanisms ----
    foreach (n_func[i]) begin
      checks++;
      if (n_func[i] == 0) begin failures++; $display("FAIL function %0d never used", i); end
    end
    checks++; if (n_wait_block == 0)   begin failures++; $display("FAIL no block-boundary wait"); end
    checks++; if (n_backpressure == 0) begin failures++; $display("FAIL no network back-pressure"); end
    checks++; if (n_gap == 0)          begin failures++; $display("FAIL no PE gaps"); end
    checks++; if (n_drain_wait == 0)   begin failures++; $display("FAIL no drain wait"); end
    checks++; if (n_io_stall == 0)     begin failures++; $display("FAIL no I/O stall"); end
    checks++; if (n_func_change == 0)  begin failures++; $display("FAIL no runtime function change"); end
    $display("migrations per function rot=%0d xmir=%0d xymir=%0d xshift=%0d xyshift=%0d",
             n_func[0], n_func[1], n_func[2], n_func[3], n_func[4]);
    $display("block waits=%0d backpressure=%0d gaps=%0d drain waits=%0d io stalls=%0d func changes=%0d",
             n_wait_block, n_backpressure, n_gap, n_drain_wait, n_io_stall, n_func_change);
    $display("halted %0d of %0d cycles", halt_cycles, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
