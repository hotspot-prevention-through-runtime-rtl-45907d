// mig_pkg: types and constants shared by the runtime-reconfiguration
// (workload migration) logic of a 2-D mesh network-on-chip.
//
// A PE position is an {X,Y} pair of COORD_W-bit coordinates; three bits
// address up to an 8x8 mesh (64 PEs), the operand width the migration
// functions are specified with. The migration functions are the three plane
// operations of rotation, mirroring and translation, plus the two-axis
// variants (X-Y mirror, X-Y shift) that were also evaluated. Their 3-bit
// encoding, the word and packet formats below and the 32-bit data width are
// this design's own choices.
package mig_pkg;

  localparam int unsigned COORD_W = 3;   // coordinate width (8x8 = 64 PEs max)
  localparam int unsigned DATA_W  = 32;  // configuration / payload word width

  typedef logic [COORD_W-1:0] coord_t;

  typedef struct packed {
    coord_t y;
    coord_t x;
  } pos_t;

  // Migration function select.
  typedef enum logic [2:0] {
    MIG_ROT     = 3'd0,  // X' = N-1-Y, Y' = X
    MIG_XMIR    = 3'd1,  // X' = N-1-X, Y' = Y
    MIG_XYMIR   = 3'd2,  // X' = N-1-X, Y' = N-1-Y
    MIG_XSHIFT  = 3'd3,  // X' = (X+OFF) mod N, Y' = Y   (right shift)
    MIG_XYSHIFT = 3'd4   // X' = (X+OFF) mod N, Y' = (Y+OFF) mod N
  } mig_func_e;

  // One configuration / state word read out of a halted PE. When is_addr is
  // set, data[2*COORD_W-1:0] holds a PE position ({y,x}) that the conversion
  // unit remaps; other words pass unchanged. last marks the PE's final word.
  typedef struct packed {
    logic              last;
    logic              is_addr;
    logic [DATA_W-1:0] data;
  } cfg_word_t;

  // A network packet (single flit) as seen at the migration logic's ports.
  typedef struct packed {
    pos_t              dst;
    pos_t              src;
    logic              last;
    logic              is_addr;
    logic [DATA_W-1:0] data;
  } pkt_t;

  function automatic logic [2*COORD_W-1:0] pos_idx(pos_t p);
    return {p.y, p.x};
  endfunction

endpackage
