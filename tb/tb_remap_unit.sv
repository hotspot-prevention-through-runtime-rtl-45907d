// tb_remap_unit: exhaustive check of the migration function. For every mesh
// size N = 1..8, every function, every offset below N and every position in
// the mesh, the output is compared with the integer reference model. It also
// checks that each function is a permutation of the mesh and that rotating
// four times, or mirroring twice, gives back the start position.
module tb_remap_unit;
  import mig_pkg::*;
  import tb_mig_model_pkg::*;

  mig_func_e func;
  coord_t    n_m1, offset;
  pos_t      pin, pout;
  int        checks = 0, failures = 0;

  remap_unit dut (.func, .n_m1, .offset, .pos_in(pin), .pos_out(pout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex, ey;
    bit seen [64];
    for (int n = 1; n <= 8; n++) begin
      for (int f = 0; f < 5; f++) begin
        for (int off = 0; off < n; off++) begin
          foreach (seen[i]) seen[i] = 0;
          for (int y = 0; y < n; y++) begin
            for (int x = 0; x < n; x++) begin
              func = mig_func_e'(f); n_m1 = coord_t'(n - 1); offset = coord_t'(off);
              pin = mkpos(x, y);
              #1;
              ref_remap(f, n, off, x, y, ex, ey);
              checks++;
              if (pout != mkpos(ex, ey)) begin
                failures++;
                $display("FAIL f=%0d n=%0d off=%0d (%0d,%0d) -> (%0d,%0d) expected (%0d,%0d)",
                         f, n, off, x, y, pout.x, pout.y, ex, ey);
              end
              seen[{pout.y, pout.x}] = 1;
            end
          end
          // permutation: every mesh position is hit exactly once
          for (int y = 0; y < n; y++)
            for (int x = 0; x < n; x++) begin
              checks++;
              if (!seen[{coord_t'(y), coord_t'(x)}]) begin
                failures++;
                $display("FAIL f=%0d n=%0d not a permutation", f, n);
              end
            end
        end
      end
    end
    // four rotations / two mirrors are the identity
    n_m1 = 3'd4; offset = '0;
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++) begin
        pos_t p;
        p = mkpos(x, y);
        func = MIG_ROT;
        for (int k = 0; k < 4; k++) begin pin = p; #1; p = pout; end
        checks++;
        if (p != mkpos(x, y)) begin failures++; $display("FAIL rotation^4"); end
        func = MIG_XMIR;
        for (int k = 0; k < 2; k++) begin pin = p; #1; p = pout; end
        checks++;
        if (p != mkpos(x, y)) begin failures++; $display("FAIL mirror^2"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
