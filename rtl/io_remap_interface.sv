// io_remap_interface: the migration unit at the chip's I/O port. It makes
// migration invisible off chip: packets arriving from outside address a
// workload by its original (logical) position, and their destination is
// rewritten to the PE that now runs that workload; packets leaving the chip
// have their source rewritten from the physical PE back to the logical
// position.
//
// Two maps of 2^(2*COORD_W) entries are held: phys_of[logical] and
// log_of[physical], both the identity after reset. On commit every entry of
// phys_of inside the active N x N mesh is passed through the migration
// function (phys_of[L] <= f(phys_of[L])), and log_of is permuted the same way
// (log_of[f(P)] <= log_of[P]); both updates take the one commit cycle.
// Translation is combinational: the packet streams pass straight through,
// valid/ready, with zero latency. While hold is high (the PEs are halted
// for migration) both directions are stalled, so no packet is translated
// with a stale map.
//
// That an I/O migration unit rewrites incoming destinations and outgoing
// sources follows the paper. How it tracks the placement after several
// migrations, possibly with different functions, is not given; the pair of
// maps updated through the migration function is this design's choice, as is
// stalling I/O traffic during migration.
module io_remap_interface
  import mig_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // migration update
  input  logic      commit,
  input  mig_func_e func,
  input  coord_t    offset,
  input  coord_t    n_m1,
  input  logic      hold,
  // off chip -> network (destination logical -> physical)
  input  logic      ext_in_valid,
  output logic      ext_in_ready,
  input  pkt_t      ext_in_pkt,
  output logic      net_in_valid,
  input  logic      net_in_ready,
  output pkt_t      net_in_pkt,
  // network -> off chip (source physical -> logical)
  input  logic      net_out_valid,
  output logic      net_out_ready,
  input  pkt_t      net_out_pkt,
  output logic      ext_out_valid,
  input  logic      ext_out_ready,
  output pkt_t      ext_out_pkt
);

  localparam int unsigned ENTRIES = 1 << (2 * COORD_W);

  pos_t phys_of [ENTRIES];
  pos_t log_of  [ENTRIES];
  pos_t phys_nx [ENTRIES];
  pos_t log_nx  [ENTRIES];
  pos_t f_phys  [ENTRIES];   // f(phys_of[i])
  pos_t f_idx   [ENTRIES];   // f(position i)
  logic in_mesh [ENTRIES];

  for (genvar i = 0; i < ENTRIES; i++) begin : g_map
    localparam pos_t IPOS = pos_t'(i);
    assign in_mesh[i] = (IPOS.x <= n_m1) && (IPOS.y <= n_m1);
    remap_unit u_fp (.func, .n_m1, .offset, .pos_in(phys_of[i]), .pos_out(f_phys[i]));
    remap_unit u_fi (.func, .n_m1, .offset, .pos_in(IPOS),       .pos_out(f_idx[i]));
  end

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      phys_nx[i] = in_mesh[i] ? f_phys[i] : phys_of[i];
      log_nx[i]  = log_of[i];
    end
    for (int i = 0; i < ENTRIES; i++) begin
      if (in_mesh[i]) log_nx[pos_idx(f_idx[i])] = log_of[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        phys_of[i] <= pos_t'(i);
        log_of[i]  <= pos_t'(i);
      end
    end else if (commit) begin
      phys_of <= phys_nx;
      log_of  <= log_nx;
    end
  end

  // incoming: rewrite destination
  always_comb begin
    net_in_pkt     = ext_in_pkt;
    net_in_pkt.dst = phys_of[pos_idx(ext_in_pkt.dst)];
  end
  assign net_in_valid = ext_in_valid && !hold;
  assign ext_in_ready = net_in_ready && !hold;

  // outgoing: rewrite source
  always_comb begin
    ext_out_pkt     = net_out_pkt;
    ext_out_pkt.src = log_of[pos_idx(net_out_pkt.src)];
  end
  assign ext_out_valid = net_out_valid && !hold;
  assign net_out_ready = ext_out_ready && !hold;

endmodule
