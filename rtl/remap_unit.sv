// remap_unit: the migration function. Given the current {X,Y} position of a
// workload it returns the {X,Y} position the workload moves to.
//
// Purely combinational, zero latency. The mesh is N x N with N = n_m1 + 1
// (1..8); positions and the offset must lie in 0..N-1.
//   rotation     X' = N-1-Y           Y' = X
//   X mirror     X' = N-1-X           Y' = Y
//   X-Y mirror   X' = N-1-X           Y' = N-1-Y
//   X shift      X' = (X+OFF) mod N   Y' = Y
//   X-Y shift    X' = (X+OFF) mod N   Y' = (Y+OFF) mod N
// Rotation, X mirror and X translation follow the paper's transformation
// table. The table writes translation as plain X+Offset; the wrap modulo N,
// which keeps every workload on the chip, is this design's choice, as are
// the two-axis variants (named in the results, not given as formulas) and
// the use of the same offset on both axes for the X-Y shift. N and the offset
// are inputs, so one unit serves either mesh size and the function can be
// changed at runtime.
module remap_unit
  import mig_pkg::*;
(
  input  mig_func_e func,     // migration function
  input  coord_t    n_m1,     // mesh dimension minus one
  input  coord_t    offset,   // translation offset, 0..N-1
  input  pos_t      pos_in,   // current position
  output pos_t      pos_out   // new position
);

  // (a + off) mod N for a, off < N: one conditional subtraction suffices.
  function automatic coord_t add_mod(coord_t a, coord_t off, coord_t nm1);
    logic [COORD_W:0] s;
    s = {1'b0, a} + {1'b0, off};
    if (s > {1'b0, nm1}) s = s - ({1'b0, nm1} + 1'b1);
    return s[COORD_W-1:0];
  endfunction

  always_comb begin
    pos_out = pos_in;
    unique case (func)
      MIG_ROT: begin
        pos_out.x = n_m1 - pos_in.y;
        pos_out.y = pos_in.x;
      end
      MIG_XMIR: begin
        pos_out.x = n_m1 - pos_in.x;
      end
      MIG_XYMIR: begin
        pos_out.x = n_m1 - pos_in.x;
        pos_out.y = n_m1 - pos_in.y;
      end
      MIG_XSHIFT: begin
        pos_out.x = add_mod(pos_in.x, offset, n_m1);
      end
      MIG_XYSHIFT: begin
        pos_out.x = add_mod(pos_in.x, offset, n_m1);
        pos_out.y = add_mod(pos_in.y, offset, n_m1);
      end
      default: pos_out = pos_in;
    endcase
  end

endmodule
