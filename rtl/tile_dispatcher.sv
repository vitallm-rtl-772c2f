// tile_dispatcher: issues the output tiles of one ternary projection (a
// BitLinear matrix-vector product) to the compute cores.
//
// The output vector is cut into 8-element tiles; each tile needs `kc`
// reduction chunks of 8 input elements. Tiles are dealt out in rounds: in a
// round the three TINT cores take tiles base+0..2 in lock step (the same
// activation word from data-buffer port A is broadcast to all three, each
// core reads its own weight bank), and in dual mode BoothFlex, in ternary
// mode, takes tile base+3, reading port B and weight bank 3 on its own
// schedule. A core starts a tile only when its credit counter shows a free
// output slot (take), otherwise the dispatcher stalls. Weight bank j holds
// the blocks of core j's tiles round after round: address w_base + round*kc
// + chunk.
//
// Timing: one chunk per cycle per core; memory reads are registered, so a
// core sees a chunk one cycle after its address. t_out_idx gives, in the
// cycle a TINT core raises out_valid, the index of its finished tile;
// bf_out_idx does the same for BoothFlex. `done` pulses once the last tile
// has left the cores. The round structure, credit check and weight layout
// are this design's own; the paper names the dispatcher and the credit
// counter and says both cores share W_O/FFN "at the same granularity".
module tile_dispatcher
  import vita_pkg::*;
#(
  parameter int unsigned DAW = 12,    // data-buffer address width
  parameter int unsigned WAW = 9,     // weight-bank address width
  parameter int unsigned KCW = 11,    // chunk-count width
  parameter int unsigned TW  = 11     // tile-index width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [DAW-1:0]       act_base,
  input  logic [KCW-1:0]       kc,
  input  logic [TW-1:0]        n_tiles,
  input  logic [WAW-1:0]       w_base,
  input  logic                 dual,
  output logic                 busy,
  output logic                 done,
  output logic                 stall,        // a core waited for a credit this cycle
  output logic [WAW-1:0]       w_used,       // weight words per bank used by the job
  // credits
  input  logic [3:0]           avail,        // [0..2] TINT, [3] BoothFlex
  output logic [3:0]           take,
  // buffers
  output logic                 a_en,
  output logic [DAW-1:0]       a_addr,
  output logic                 b_en,
  output logic [DAW-1:0]       b_addr,
  output logic [3:0]           w_en,
  output logic [3:0][WAW-1:0]  w_addr,
  // TINT group
  output logic [2:0]           t_valid,
  output logic                 t_first,
  output logic                 t_last,
  output logic [2:0][TW-1:0]   t_out_idx,
  // BoothFlex (ternary mode)
  output logic                 bf_valid,
  output logic                 bf_first,
  output logic                 bf_last,
  input  logic                 bf_ready,
  input  logic                 bf_out_valid,
  output logic [TW-1:0]        bf_out_idx
);

  logic [DAW-1:0] abase;
  logic [KCW-1:0] nkc;
  logic [TW-1:0]  ntiles;
  logic [WAW-1:0] wbase;
  logic           dual_q;
  logic [2:0]     nc;
  assign nc = dual_q ? 3'd4 : 3'd3;

  // ---------------------------------------------------------------- TINT side
  logic           t_run;
  logic [TW+1:0]  t_base;
  logic [KCW-1:0] t_chunk;
  logic [WAW-1:0] t_woff;
  logic [2:0]     t_has;           // cores holding a real tile this round
  logic           t_go;
  logic [2:0]     c1_v;  logic c1_first, c1_last; logic [2:0][TW-1:0] c1_idx;
  logic [2:0]     c2_v;  logic [2:0][TW-1:0] c2_idx;

  always_comb
    for (int j = 0; j < 3; j++) t_has[j] = (t_base + (TW+2)'(j)) < (TW+2)'(ntiles);

  // a round may start only when every participating core has a credit
  assign t_go = t_run && ((t_chunk != 0) || ((t_has & ~avail[2:0]) == 3'b000));

  // -------------------------------------------------------------- BoothFlex
  logic           b_run;
  logic [TW+1:0]  b_tile;
  logic [KCW-1:0] b_chunk;
  logic [WAW-1:0] b_woff;
  logic           b_go;
  logic           bq_v, bq_first, bq_last;
  logic [TW-1:0]  bq_idx;
  logic           pend_ne;

  assign b_go = b_run && ((b_chunk != 0) || avail[3]);

  assign a_en   = t_go;
  assign a_addr = abase + DAW'(t_chunk);
  assign b_en   = b_go;
  assign b_addr = abase + DAW'(b_chunk);
  always_comb begin
    w_en   = {b_go, {3{t_go}} & t_has};
    w_addr = '0;
    for (int j = 0; j < 3; j++) w_addr[j] = wbase + t_woff + WAW'(t_chunk);
    w_addr[3] = wbase + b_woff + WAW'(b_chunk);
    take    = '0;
    take[2:0] = (t_go && t_chunk == 0) ? t_has : 3'b000;
    take[3]   = b_go && b_chunk == 0;
  end
  assign stall  = (t_run && !t_go) || (b_run && !b_go);
  assign w_used = t_woff;

  assign t_valid   = c1_v;
  assign t_first   = c1_first;
  assign t_last    = c1_last;
  assign t_out_idx = c2_idx;
  assign bf_valid  = bq_v;
  assign bf_first  = bq_first;
  assign bf_last   = bq_last;

  tile_fifo #(.W(TW), .DEPTH(4)) u_pend (
    .clk, .rst_n,
    .push(bq_v && bq_last && bf_ready), .push_data(bq_idx),
    .pop(bf_out_valid && pend_ne), .not_empty(pend_ne), .head(bf_out_idx)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      abase <= '0; nkc <= '0; ntiles <= '0; wbase <= '0; dual_q <= 1'b0;
      t_run <= 1'b0; t_base <= '0; t_chunk <= '0; t_woff <= '0;
      c1_v <= '0; c1_first <= 1'b0; c1_last <= 1'b0; c1_idx <= '0; c2_v <= '0; c2_idx <= '0;
      b_run <= 1'b0; b_tile <= '0; b_chunk <= '0; b_woff <= '0;
      bq_v <= 1'b0; bq_first <= 1'b0; bq_last <= 1'b0; bq_idx <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      // TINT pipeline: address -> chunk -> result
      c1_v     <= t_go ? t_has : 3'b000;
      c1_first <= (t_chunk == 0);
      c1_last  <= (t_chunk == nkc - 1'b1);
      for (int j = 0; j < 3; j++) c1_idx[j] <= TW'(t_base) + TW'(j);
      c2_v   <= c1_v & {3{c1_last}};
      if (c1_last) c2_idx <= c1_idx;
      if (t_go) begin
        if (t_chunk == nkc - 1'b1) begin
          t_chunk <= '0;
          t_woff  <= t_woff + WAW'(nkc);
          t_base  <= t_base + (TW+2)'(nc);
          if (t_base + (TW+2)'(nc) >= (TW+2)'(ntiles)) t_run <= 1'b0;
        end else t_chunk <= t_chunk + 1'b1;
      end
      // BoothFlex pipeline
      if (bf_ready || !bq_v) bq_v <= b_go;
      if (b_go) begin
        bq_first <= (b_chunk == 0);
        bq_last  <= (b_chunk == nkc - 1'b1);
        bq_idx   <= TW'(b_tile);
        if (b_chunk == nkc - 1'b1) begin
          b_chunk <= '0;
          b_woff  <= b_woff + WAW'(nkc);
          b_tile  <= b_tile + 4;
          if (b_tile + 4 >= (TW+2)'(ntiles)) b_run <= 1'b0;
        end else b_chunk <= b_chunk + 1'b1;
      end
      if (start && !busy) begin
        abase <= act_base; nkc <= kc; ntiles <= n_tiles; wbase <= w_base; dual_q <= dual;
        t_run <= (n_tiles != 0); t_base <= '0; t_chunk <= '0; t_woff <= '0;
        b_run <= dual && (n_tiles > 3); b_tile <= (TW+2)'(3); b_chunk <= '0; b_woff <= '0;
        busy  <= 1'b1;
      end else if (busy && !t_run && !b_run && c1_v == 0 && c2_v == 0 && !bq_v && !pend_ne
                   && !(bf_out_valid)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // BoothFlex accepts a ternary chunk every cycle
  a_bf_ready: assert property (@(posedge clk) disable iff (!rst_n) bq_v |-> bf_ready);

endmodule
