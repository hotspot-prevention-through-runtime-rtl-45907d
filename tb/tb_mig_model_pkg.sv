// tb_mig_model_pkg: reference model of the migration functions for the
// testbenches, written independently of the RTL with integer arithmetic:
// positions are ints, translation wraps with the % operator.
package tb_mig_model_pkg;
  import mig_pkg::*;

  function automatic void ref_remap(input int func, input int n, input int off,
                                    input int x, input int y,
                                    output int nx, output int ny);
    case (func)
      0: begin nx = n - 1 - y;        ny = x;               end  // rotation
      1: begin nx = n - 1 - x;        ny = y;               end  // X mirror
      2: begin nx = n - 1 - x;        ny = n - 1 - y;       end  // X-Y mirror
      3: begin nx = (x + off) % n;    ny = y;               end  // X shift
      4: begin nx = (x + off) % n;    ny = (y + off) % n;   end  // X-Y shift
      default: begin nx = x; ny = y; end
    endcase
  endfunction

  function automatic pos_t mkpos(int x, int y);
    pos_t p;
    p.x = coord_t'(x);
    p.y = coord_t'(y);
    return p;
  endfunction
endpackage
