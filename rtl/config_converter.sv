// config_converter: the conversion unit. While the PEs are halted, the
// configuration and state words of one PE at a time stream through it; it
// turns each word into a network packet addressed to the PE's new position.
//
// Words flagged is_addr carry a PE position in data[2*COORD_W-1:0] (for
// instance the partner a PE sends its results to); that field is remapped by
// the same migration function, so all workloads keep their relative
// placement. Other words pass unchanged. The destination of every packet is
// the migration function applied to src_pos, the PE being unloaded; the
// source field is src_pos.
//
// Interface: valid/ready on both sides. One register stage: a word accepted
// in cycle t is offered on the output in cycle t+1; full throughput of one
// word per cycle while the output is ready. func, n_m1, offset and src_pos
// must be stable while words flow.
//
// That configuration passes through a conversion unit and then over the
// network follows the paper; the word format, the address flag and the
// pipeline stage are this design's choices.
module config_converter
  import mig_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  mig_func_e func,
  input  coord_t    n_m1,
  input  coord_t    offset,
  input  pos_t      src_pos,     // PE currently being unloaded
  // from the halted PE
  input  logic      in_valid,
  output logic      in_ready,
  input  cfg_word_t in_word,
  // to the network
  output logic      out_valid,
  input  logic      out_ready,
  output pkt_t      out_pkt,
  output logic      busy         // a word is held in the stage
);

  pos_t dst_pos, addr_new;
  pos_t addr_old;

  assign addr_old = pos_t'(in_word.data[2*COORD_W-1:0]);

  remap_unit u_dst (.func, .n_m1, .offset, .pos_in(src_pos),  .pos_out(dst_pos));
  remap_unit u_adr (.func, .n_m1, .offset, .pos_in(addr_old), .pos_out(addr_new));

  pkt_t pkt_next;
  always_comb begin
    pkt_next         = '0;
    pkt_next.dst     = dst_pos;
    pkt_next.src     = src_pos;
    pkt_next.last    = in_word.last;
    pkt_next.is_addr = in_word.is_addr;
    pkt_next.data    = in_word.data;
    if (in_word.is_addr) pkt_next.data[2*COORD_W-1:0] = addr_new;
  end

  assign in_ready = !out_valid || out_ready;
  assign busy     = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pkt   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_pkt <= pkt_next;
    end
  end

  // Handshake rule: a packet offered and not taken stays unchanged.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_pkt));

endmodule
