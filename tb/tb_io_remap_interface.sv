// tb_io_remap_interface: applies chains of random migrations (random
// function and offset each time) to the I/O migration unit for mesh sizes 4,
// 5 and 8, and after every commit checks, for every workload, that an
// incoming packet addressed to its logical position is sent to the physical
// PE the reference model says now holds it, and that a packet leaving that
// PE carries the logical position as source. Other packet fields must pass
// unchanged, and hold must stall both directions.
module tb_io_remap_interface;
  import mig_pkg::*;
  import tb_mig_model_pkg::*;

  logic      clk = 0, rst_n = 0;
  logic      commit, hold;
  mig_func_e func;
  coord_t    offset, n_m1;
  logic      ext_in_valid, ext_in_ready, net_in_valid, net_in_ready;
  logic      net_out_valid, net_out_ready, ext_out_valid, ext_out_ready;
  pkt_t      ext_in_pkt, net_in_pkt, net_out_pkt, ext_out_pkt;
  int        checks = 0, failures = 0;

  io_remap_interface dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int px[64], py[64];   // physical position of logical workload (x + 8*y)

  task automatic check_all(int n);
    for (int ly = 0; ly < n; ly++)
      for (int lx = 0; lx < n; lx++) begin
        int l;
        pkt_t p;
        l = lx + 8 * ly;
        p = '0;
        p.dst = mkpos(lx, ly);
        p.src = mkpos($urandom_range(0, 7), $urandom_range(0, 7));
        p.data = $urandom;
        ext_in_pkt = p;
        ext_in_valid = 1; net_in_ready = 1;
        p = '0;
        p.src = mkpos(px[l], py[l]);
        p.dst = mkpos($urandom_range(0, 7), $urandom_range(0, 7));
        p.data = $urandom;
        net_out_pkt = p;
        net_out_valid = 1; ext_out_ready = 1;
        #1;
        checks++;
        if (net_in_pkt.dst != mkpos(px[l], py[l]) || net_in_pkt.src != ext_in_pkt.src ||
            net_in_pkt.data != ext_in_pkt.data || !net_in_valid || !ext_in_ready) begin
          failures++;
          $display("FAIL in: logical (%0d,%0d) -> (%0d,%0d) expected (%0d,%0d)",
                   lx, ly, net_in_pkt.dst.x, net_in_pkt.dst.y, px[l], py[l]);
        end
        checks++;
        if (ext_out_pkt.src != mkpos(lx, ly) || ext_out_pkt.dst != net_out_pkt.dst ||
            ext_out_pkt.data != net_out_pkt.data || !ext_out_valid || !net_out_ready) begin
          failures++;
          $display("FAIL out: physical (%0d,%0d) -> (%0d,%0d) expected (%0d,%0d)",
                   px[l], py[l], ext_out_pkt.src.x, ext_out_pkt.src.y, lx, ly);
        end
      end
    // hold stalls both ways
    hold = 1; #1;
    checks++;
    if (net_in_valid || ext_in_ready || ext_out_valid || net_out_ready) begin
      failures++; $display("FAIL hold does not stall");
    end
    hold = 0;
  endtask

  initial begin
    int sizes[3] = '{4, 5, 8};
    commit = 0; hold = 0; func = MIG_ROT; offset = 0; n_m1 = 0;
    ext_in_valid = 0; net_in_ready = 0; net_out_valid = 0; ext_out_ready = 0;
    ext_in_pkt = '0; net_out_pkt = '0;
    foreach (sizes[s]) begin
      int n;
      n = sizes[s];
      rst_n = 0;
      n_m1 = coord_t'(n - 1);
      for (int i = 0; i < 64; i++) begin px[i] = i % 8; py[i] = i / 8; end
      repeat (2) @(posedge clk);
      #1 rst_n = 1;
      check_all(n);
      for (int k = 0; k < 30; k++) begin
        int f, off;
        f = $urandom_range(0, 4);
        off = $urandom_range(0, n - 1);
        @(negedge clk);
        func = mig_func_e'(f); offset = coord_t'(off); commit = 1;
        @(negedge clk);
        commit = 0;
        for (int ly = 0; ly < n; ly++)
          for (int lx = 0; lx < n; lx++) begin
            int l, nx, ny;
            l = lx + 8 * ly;
            ref_remap(f, n, off, px[l], py[l], nx, ny);
            px[l] = nx; py[l] = ny;
          end
        check_all(n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
