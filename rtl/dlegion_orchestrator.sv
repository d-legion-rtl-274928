// dlegion_orchestrator: global D-Legion orchestrator.
//
// Takes one attention-stage command and turns it into rounds of per-Legion
// workloads (M, K, N, mode); every Legion then runs on its own. Mapping:
//   STG_Q_PROJ   : each query head is one workload (M=seq, K=hidden, N=head_dim,
//                  MODE_PROJ2); head h goes to Legion h mod L in round h / L.
//   STG_KV_PROJ  : the same for the 2*kv_heads K and V projections (unit u < kv_heads
//                  is K of head u, else V of head u - kv_heads).
//   STG_SCORE    : one round per head; the head's (M=seq, K=head_dim, N=seq)
//                  product is split over all Legions along N (MODE_DENSE).
//   STG_ATT_HEAD : one round per head; (M=seq, K=seq, N=head_dim) split along N.
//   STG_OUT_PROJ : one round; (M=seq, K=hidden, N=hidden) split along N
//                  (MODE_PROJ2).
// Splitting along N gives Legion l the columns [l*ceil(N/L), ...) reported on
// n_off; unit reports the head (or K/V unit) the Legion works on, and kv_group
// the KV head it needs (head / (heads / kv_heads)), so that a tile feeder can
// multicast shared KV tiles to the Legions of one group.
// Handshake: cmd_valid/cmd_ready takes a command; after each round (all started
// Legions reported done) round_done stays high until round_ack, which gives
// the host time to read the results out; cmd_done pulses after the last round.
// The mapping rules are the paper's; rounds, the round handshake and the
// reporting ports are this design's choices.
module dlegion_orchestrator
  import dlegion_pkg::*;
#(
  parameter int unsigned L = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  layer_cmd_t                  cmd,
  output logic [L-1:0]                start,
  output workload_t [L-1:0]           wl,
  output logic [L-1:0][DIM_W-1:0]     unit,
  output logic [L-1:0][DIM_W-1:0]     kv_group,
  output logic [L-1:0][DIM_W-1:0]     n_off,
  output logic [L-1:0]                active,
  input  logic [L-1:0]                legion_done,
  output logic                        round_done,
  input  logic                        round_ack,
  output logic [DIM_W-1:0]            round,
  output logic                        cmd_done
);

  localparam int unsigned LL = $clog2(L);

  typedef enum logic [1:0] {O_IDLE, O_ISSUE, O_WAIT, O_ACK} ost_e;

  ost_e             st;
  layer_cmd_t       c_q;
  logic [DIM_W-1:0] nrounds, nunits;
  logic [L-1:0]     pend;

  // rounds of a command
  logic [DIM_W-1:0] units_s, rounds_s;
  always_comb begin
    case (cmd.stage)
      STG_Q_PROJ:  units_s = cmd.heads;
      STG_KV_PROJ: units_s = DIM_W'(cmd.kv_heads << 1);
      default:     units_s = cmd.heads;
    endcase
    case (cmd.stage)
      STG_Q_PROJ, STG_KV_PROJ: rounds_s = DIM_W'((32'(units_s) + L - 1) >> LL);
      STG_OUT_PROJ:            rounds_s = 1;
      default:                 rounds_s = cmd.heads;
    endcase
  end

  // per-Legion assignment for the current round
  logic [DIM_W-1:0] grp_div;
  always_comb begin
    logic [DIM_W-1:0] ntot, nper, u;
    grp_div = (c_q.kv_heads == 0) ? 1 : DIM_W'(c_q.heads / c_q.kv_heads);
    if (grp_div == 0) grp_div = 1;
    for (int l = 0; l < L; l++) begin
      wl[l]       = '0;
      unit[l]     = '0;
      n_off[l]    = '0;
      active[l]   = 1'b0;
      kv_group[l] = '0;
      case (c_q.stage)
        STG_Q_PROJ, STG_KV_PROJ: begin
          u         = DIM_W'((32'(round) << LL) + l);
          active[l] = (u < nunits);
          unit[l]   = u;
          kv_group[l] = (c_q.stage == STG_Q_PROJ) ? DIM_W'(u / grp_div) :
                        (u < c_q.kv_heads) ? u : DIM_W'(u - c_q.kv_heads);
          wl[l]     = '{m: c_q.seq, k: c_q.hidden, n: c_q.head_dim, mode: MODE_PROJ2};
        end
        default: begin
          ntot = (c_q.stage == STG_SCORE)    ? c_q.seq :
                 (c_q.stage == STG_ATT_HEAD) ? c_q.head_dim : c_q.hidden;
          nper = DIM_W'((32'(ntot) + L - 1) >> LL);
          n_off[l]  = DIM_W'(l * nper);
          active[l] = (n_off[l] < ntot);
          unit[l]   = (c_q.stage == STG_OUT_PROJ) ? '0 : round;
          kv_group[l] = (c_q.stage == STG_OUT_PROJ) ? '0 : DIM_W'(round / grp_div);
          wl[l].m    = c_q.seq;
          wl[l].k    = (c_q.stage == STG_SCORE)    ? c_q.head_dim :
                       (c_q.stage == STG_ATT_HEAD) ? c_q.seq : c_q.hidden;
          wl[l].n    = (ntot - n_off[l] < nper) ? DIM_W'(ntot - n_off[l]) : nper;
          wl[l].mode = (c_q.stage == STG_OUT_PROJ) ? MODE_PROJ2 : MODE_DENSE;
        end
      endcase
    end
  end

  assign cmd_ready  = (st == O_IDLE);
  assign round_done = (st == O_ACK);
  assign start      = (st == O_ISSUE) ? active : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= O_IDLE; c_q <= '0; nrounds <= '0; nunits <= '0;
      round <= '0; pend <= '0; cmd_done <= 1'b0;
    end else begin
      cmd_done <= 1'b0;
      case (st)
        O_IDLE: if (cmd_valid) begin
          c_q <= cmd; nunits <= units_s; nrounds <= rounds_s; round <= '0;
          st <= O_ISSUE;
        end
        O_ISSUE: begin
          pend <= active;
          st   <= O_WAIT;
        end
        O_WAIT: begin
          pend <= pend & ~legion_done;
          if ((pend & ~legion_done) == '0) st <= O_ACK;
        end
        default: if (round_ack) begin  // O_ACK
          if (round + 1'b1 >= nrounds) begin
            st <= O_IDLE; cmd_done <= 1'b1;
          end else begin
            round <= round + 1'b1; st <= O_ISSUE;
          end
        end
      endcase
    end
  end

endmodule
