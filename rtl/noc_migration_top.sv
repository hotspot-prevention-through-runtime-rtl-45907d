// noc_migration_top: runtime-reconfiguration (workload migration) logic of
// an N x N mesh network-on-chip whose PEs run the tasks of an LDPC decoder.
// To keep any one PE from becoming a hotspot, the whole placement of
// workloads is moved across the mesh at regular intervals by one of five
// migration functions (rotation, X mirror, X-Y mirror, X shift, X-Y shift),
// without spare PEs and without extra configuration storage.
//
// Blocks:
//   migration_controller  period timer and migration sequencer
//   config_converter      conversion unit: remaps each unloaded PE's words
//                         and addresses them to the PE's new position
//   io_remap_interface    migration unit at the chip I/O: keeps the outside
//                         world addressing workloads by their original
//                         position
// The PEs and the mesh network are outside this module. Towards the PEs
// the top offers halt, an unload request naming one PE (unload_pos) with a
// valid/ready word stream back from it, block_done from the PEs, and a
// commit pulse on which every PE switches to the configuration it received.
// Towards the network it offers the stream of migration packets and takes
// net_idle, high when no migration packet is still in flight, plus the two
// I/O packet streams (off chip -> network, network -> off chip), which
// are stalled while halt is high.
//
// Timing: a migration starts at the first block_done after period_cycles
// have elapsed; with W words per PE and no back-pressure the PEs stay halted
// for 1 + N*N*W + D + 1 cycles, D >= 1 being the drain until net_idle.
//
// The function, offset and mesh size (N = n_m1_cfg + 1, up to 8) are runtime
// inputs sampled at the start of each migration, so the function can be
// changed at runtime. The overall scheme follows the paper; the interfaces,
// the single conversion unit and the PE-by-PE order are this design's.
module noc_migration_top
  import mig_pkg::*;
#(
  parameter int unsigned PERIOD_W = 32,
  parameter int unsigned COUNT_W  = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                mig_enable,
  input  logic [PERIOD_W-1:0] period_cycles,
  input  mig_func_e           func_cfg,
  input  coord_t              offset_cfg,
  input  coord_t              n_m1_cfg,
  // PE array
  input  logic                block_done,
  output logic                halt,
  output logic                unload_req,
  output pos_t                unload_pos,
  input  logic                pe_word_valid,
  output logic                pe_word_ready,
  input  cfg_word_t           pe_word,
  output logic                commit,
  // migration packets into the network
  output logic                mig_pkt_valid,
  input  logic                mig_pkt_ready,
  output pkt_t                mig_pkt,
  input  logic                net_idle,
  // chip I/O: off chip -> network
  input  logic                ext_in_valid,
  output logic                ext_in_ready,
  input  pkt_t                ext_in_pkt,
  output logic                net_in_valid,
  input  logic                net_in_ready,
  output pkt_t                net_in_pkt,
  // chip I/O: network -> off chip
  input  logic                net_out_valid,
  output logic                net_out_ready,
  input  pkt_t                net_out_pkt,
  output logic                ext_out_valid,
  input  logic                ext_out_ready,
  output pkt_t                ext_out_pkt,
  // status
  output logic                mig_pending,
  output mig_func_e           act_func,
  output logic [COUNT_W-1:0]  mig_count
);

  coord_t act_offset, act_n_m1;
  logic   conv_in_valid, conv_in_ready, conv_busy, word_fire;

  assign conv_in_valid = pe_word_valid && unload_req;
  assign pe_word_ready = conv_in_ready && unload_req;
  assign word_fire     = conv_in_valid && conv_in_ready;

  migration_controller #(.PERIOD_W(PERIOD_W), .COUNT_W(COUNT_W)) u_ctrl (
    .clk, .rst_n,
    .enable       (mig_enable),
    .period_cycles,
    .func_cfg, .offset_cfg, .n_m1_cfg,
    .block_done,
    .halt, .unload_req, .unload_pos,
    .word_fire,
    .word_last    (pe_word.last),
    .conv_busy, .net_idle,
    .commit, .act_func, .act_offset, .act_n_m1,
    .pending      (mig_pending),
    .mig_count
  );

  config_converter u_conv (
    .clk, .rst_n,
    .func      (act_func),
    .n_m1      (act_n_m1),
    .offset    (act_offset),
    .src_pos   (unload_pos),
    .in_valid  (conv_in_valid),
    .in_ready  (conv_in_ready),
    .in_word   (pe_word),
    .out_valid (mig_pkt_valid),
    .out_ready (mig_pkt_ready),
    .out_pkt   (mig_pkt),
    .busy      (conv_busy)
  );

  io_remap_interface u_io (
    .clk, .rst_n,
    .commit,
    .func   (act_func),
    .offset (act_offset),
    .n_m1   (act_n_m1),
    .hold   (halt),
    .ext_in_valid, .ext_in_ready, .ext_in_pkt,
    .net_in_valid, .net_in_ready, .net_in_pkt,
    .net_out_valid, .net_out_ready, .net_out_pkt,
    .ext_out_valid, .ext_out_ready, .ext_out_pkt
  );

endmodule
