// migration_controller: sequences one runtime migration of the whole mesh.
//
// A period counter runs while enable is high. When it has counted period_cycles
// cycles a migration becomes pending; the migration starts at the next
// block_done pulse, i.e. when the PEs have finished decoding a message block,
// so that little state has to move. The controller then
//   HALT    raises halt for one cycle before anything is read out,
//   UNLOAD  asks each PE in turn, in raster order (x fastest), to stream its
//           configuration and state words into the conversion unit; the PE
//           is done when its word marked last has been accepted,
//   DRAIN   waits until the conversion unit is empty and the network reports
//           all migration packets delivered (net_idle),
//   COMMIT  pulses commit for one cycle: the PEs switch to the configuration
//           they received and the I/O migration unit updates its map,
// and drops halt again. The function, offset and mesh size are sampled when
// the migration starts and held in act_* until the next one, so the function
// may be changed at runtime without disturbing a migration in progress.
//
// Timing: with W words per PE and no back-pressure, halt is high for
// 1 + N*N*W + D + 1 cycles, D >= 1 being the drain time; the period is
// measured from one expiry to the next and keeps counting during migration.
//
// Halting the PEs, passing their state through a conversion unit, migrating
// periodically at message-block boundaries and a deterministic migration
// time follow the paper. The paper moves "groups of PEs in phases" without
// defining the groups; here a phase is one PE, which keeps a single
// conversion unit busy and the network load to one stream. The state
// encoding, the drain/commit handshake and the counter widths are this
// design's choices.
module migration_controller
  import mig_pkg::*;
#(
  parameter int unsigned PERIOD_W = 32,
  parameter int unsigned COUNT_W  = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                enable,
  input  logic [PERIOD_W-1:0] period_cycles,  // >= 1
  input  mig_func_e           func_cfg,
  input  coord_t              offset_cfg,
  input  coord_t              n_m1_cfg,
  // from the PEs
  input  logic                block_done,     // a message block was finished
  // PE unload port
  output logic                halt,
  output logic                unload_req,
  output pos_t                unload_pos,
  input  logic                word_fire,      // a word entered the converter
  input  logic                word_last,      // ... and it was the PE's last
  input  logic                conv_busy,
  input  logic                net_idle,
  // results
  output logic                commit,
  output mig_func_e           act_func,
  output coord_t              act_offset,
  output coord_t              act_n_m1,
  output logic                pending,
  output logic [COUNT_W-1:0]  mig_count
);

  typedef enum logic [2:0] {S_IDLE, S_HALT, S_UNLOAD, S_DRAIN, S_COMMIT} state_e;
  state_e state;

  logic [PERIOD_W-1:0] cnt;
  logic                expire;

  assign expire = enable && (cnt >= period_cycles - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (!enable || expire) begin
      cnt <= '0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pending    <= 1'b0;
      unload_pos <= '0;
      act_func   <= MIG_ROT;
      act_offset <= '0;
      act_n_m1   <= '0;
      mig_count  <= '0;
    end else begin
      if (expire) pending <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (pending && block_done) begin
            pending    <= expire;
            act_func   <= func_cfg;
            act_offset <= offset_cfg;
            act_n_m1   <= n_m1_cfg;
            unload_pos <= '0;
            state      <= S_HALT;
          end
        end
        S_HALT: state <= S_UNLOAD;
        S_UNLOAD: begin
          if (word_fire && word_last) begin
            if (unload_pos.x == act_n_m1) begin
              unload_pos.x <= '0;
              if (unload_pos.y == act_n_m1) state <= S_DRAIN;
              else unload_pos.y <= unload_pos.y + 1'b1;
            end else begin
              unload_pos.x <= unload_pos.x + 1'b1;
            end
          end
        end
        S_DRAIN: if (!conv_busy && net_idle) state <= S_COMMIT;
        S_COMMIT: begin
          mig_count <= mig_count + 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign halt       = (state != S_IDLE);
  assign unload_req = (state == S_UNLOAD);
  assign commit     = (state == S_COMMIT);

  a_fire_in_unload: assert property (@(posedge clk) disable iff (!rst_n)
                                     word_fire |-> state == S_UNLOAD);

endmodule
