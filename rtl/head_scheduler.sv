// head_scheduler: layer-level schedule with head-level pipelining.
//
// One decoder layer for one token is run as a list of jobs:
//   for h = 0..H-1:  Q_h, K_h, V_h projections on the TINT group, then the
//                    head's attention (LOP, top-K, QK^T, softmax, SV) on the
//                    attention engine / BoothFlex;
//   then             O projection, gate and up projections, down projection
//                    on TINT and BoothFlex together (dual mode).
// Attention of head h is started as soon as V_h is quantized, and the
// scheduler immediately proceeds to Q_{h+1}; it waits only if attention of
// head h-1 is still running (one-head offset, Fig. 5). Q is double-buffered
// by head parity so Q_{h+1} cannot overwrite Q_h before it is read. The
// query and output addresses of the running attention are latched when it
// starts, since the head counter moves on to h+1 in the same cycle.
//
// Every projection is one nonlinear-unit vector: the scheduler starts the
// tile dispatcher, requests the nonlinear unit (nl_req until nl_gnt) and
// counts the job finished at its nl_done. The dequantization scale of a
// projection is (scale of its input vector) x (weight scale), so the
// (INT8 vector, scale) pair produced by one job is what the next consumes.
// Weight blocks are taken from the weight banks in job order (w_ptr
// advances by each job's use). Job order and overlap follow the paper;
// the job encoding, the buffer map and the FFN simplification (the down
// projection consumes the up-projection output; gating is not modelled) are
// this design's own.
module head_scheduler
  import vita_pkg::*;
#(
  parameter int unsigned DAW = 12,
  parameter int unsigned WAW = 9,
  parameter int unsigned KCW = 11,
  parameter int unsigned TW  = 11,
  parameter int unsigned HW  = 4,      // head-chunk width (head dim / 8 < 2**HW)
  parameter int unsigned NHW = 6       // head-count width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // layer configuration
  input  logic [NHW-1:0]       n_heads,
  input  logic [HW:0]          hc,        // head dim / 8
  input  logic [KCW-1:0]       dc,        // model dim / 8
  input  logic [KCW-1:0]       fc,        // FFN dim / 8
  input  logic [SCALE_W-1:0]   x_scale,   // scale of the input vector
  input  logic [SCALE_W-1:0]   w_scale,   // ternary weight scale (beta)
  input  logic [DAW-1:0]       x_base, q_base, k_base, v_base, o_base,
  input  logic [DAW-1:0]       h_base, g_base, u_base, y_base,
  output logic                 busy,
  output logic                 done,
  output logic [SCALE_W-1:0]   y_scale,
  output logic [3:0]           phase,     // job kind being issued (for observation)
  // tile dispatcher
  output logic                 d_start,
  output logic [DAW-1:0]       d_act_base,
  output logic [KCW-1:0]       d_kc,
  output logic [TW-1:0]        d_tiles,
  output logic [WAW-1:0]       d_w_base,
  output logic                 d_dual,
  input  logic                 d_done,
  input  logic [WAW-1:0]       d_w_used,
  // nonlinear unit
  output logic                 nl_req,
  output nl_mode_e             nl_mode,
  output logic [TW-1:0]        nl_tiles,
  output logic [TW+2:0]        nl_elems,
  output logic [SCALE_W-1:0]   nl_scale,
  output logic [DAW-1:0]       nl_base,
  input  logic                 nl_gnt,
  input  logic                 nl_done,
  input  logic [SCALE_W-1:0]   nl_out_scale,
  // attention engine
  output logic                 a_start,
  output logic [DAW-1:0]       a_q_base,
  output logic [DAW-1:0]       a_o_base,
  input  logic                 a_busy,
  input  logic                 a_done
);

  typedef enum logic [3:0] {J_Q, J_K, J_V, J_O, J_G, J_U, J_D, J_END} job_e;
  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_RUN, S_ATTN, S_DRAIN, S_FIN} state_e;

  state_e          state;
  job_e            job;
  logic [NHW-1:0]  head;
  logic [WAW-1:0]  w_ptr;
  logic            gnt_seen, disp_done, nl_fin;
  logic [SCALE_W-1:0] in_scale, attn_scale, h_scale, u_scale;
  logic [DAW-1:0]  qslot;

  assign phase = job;
  assign qslot = q_base + (head[0] ? DAW'(hc) : '0);

  // parameters of the current job
  always_comb begin
    d_dual     = 1'b0;
    d_act_base = x_base;
    d_kc       = dc;
    d_tiles    = TW'(hc);
    nl_mode    = NL_ABSMAX;
    nl_base    = qslot;
    in_scale   = x_scale;
    unique case (job)
      J_Q: nl_base = qslot;
      J_K: nl_base = k_base;
      J_V: nl_base = v_base;
      J_O: begin
        d_dual = 1'b1; d_act_base = o_base; d_kc = KCW'(n_heads) * KCW'(hc); d_tiles = TW'(dc);
        nl_mode = NL_RMSNORM; nl_base = h_base; in_scale = attn_scale;
      end
      J_G, J_U: begin
        d_dual = 1'b1; d_act_base = h_base; d_kc = dc; d_tiles = TW'(fc);
        nl_base = (job == J_G) ? g_base : u_base; in_scale = h_scale;
      end
      default: begin   // J_D
        d_dual = 1'b1; d_act_base = u_base; d_kc = fc; d_tiles = TW'(dc);
        nl_base = y_base; in_scale = u_scale;
      end
    endcase
    nl_tiles = d_tiles;
    nl_elems = (TW+3)'(d_tiles) << 3;
    nl_scale = 32'((64'(in_scale) * 64'(w_scale)) >> SCALE_F);
  end

  assign d_w_base = w_ptr;
  assign nl_req   = (state == S_RUN) && !gnt_seen;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; job <= J_Q; head <= '0; w_ptr <= '0; gnt_seen <= 1'b0;
      disp_done <= 1'b0; nl_fin <= 1'b0; attn_scale <= '0; h_scale <= '0; u_scale <= '0;
      y_scale <= '0; d_start <= 1'b0; a_start <= 1'b0; done <= 1'b0;
      a_q_base <= '0; a_o_base <= '0;
    end else begin
      d_start <= 1'b0;
      a_start <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          job <= J_Q; head <= '0; w_ptr <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          d_start   <= 1'b1;
          gnt_seen  <= 1'b0;
          disp_done <= 1'b0;
          nl_fin    <= 1'b0;
          state     <= S_RUN;
        end
        S_RUN: begin
          if (nl_gnt) gnt_seen <= 1'b1;
          if (d_done) begin
            disp_done <= 1'b1;
            w_ptr     <= w_ptr + d_w_used;
          end
          if (nl_done && gnt_seen) nl_fin <= 1'b1;
          if (disp_done && nl_fin) begin
            unique case (job)
              J_Q: begin job <= J_K; state <= S_ISSUE; end
              J_K: begin job <= J_V; state <= S_ISSUE; end
              J_V: state <= S_ATTN;
              J_O: begin h_scale <= nl_out_scale; job <= J_G; state <= S_ISSUE; end
              J_G: begin job <= J_U; state <= S_ISSUE; end
              J_U: begin u_scale <= nl_out_scale; job <= J_D; state <= S_ISSUE; end
              default: begin y_scale <= nl_out_scale; state <= S_FIN; end
            endcase
          end
        end
        S_ATTN: if (!a_busy && !a_start) begin
          // head h enters attention; TINT moves on to head h+1. The
          // attention addresses are latched with a_start because `head`
          // advances in the same cycle.
          a_start  <= 1'b1;
          a_q_base <= qslot;
          a_o_base <= o_base + DAW'(head) * DAW'(hc);
          if (head == n_heads - 1'b1) state <= S_DRAIN;
          else begin
            head  <= head + 1'b1;
            job   <= J_Q;
            state <= S_ISSUE;
          end
        end
        S_DRAIN: if (!a_busy && !a_start) begin
          job   <= J_O;
          state <= S_ISSUE;
        end
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (a_done) attn_scale <= nl_out_scale;
    end
  end

  // attention of a head is only started once the previous head has left it
  a_one_offset: assert property (@(posedge clk) disable iff (!rst_n) a_start |-> !a_busy);

endmodule
