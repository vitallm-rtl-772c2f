// topk_selector: comparison-free, k-degree parallel top-K index selector.
//
// Scores arrive eight per cycle (one LOP row group; token index = 8*group +
// lane). Each score is bucketized into one of NBIN ordered bins: bin 0 holds
// every score <= 0, and a positive score s goes to bin 1 + 2*p + s[p-1], where
// p is the position of its leading one (two bins per octave). The bin of each
// token is written to a bin memory and a histogram of bin occupancy is
// counted; no two scores are ever compared with each other.
// After the last group a high-to-low prefix scan over the histogram finds the
// cut bin, the first bin at which the cumulative count reaches K, and the
// quota of tokens still needed from that bin. The bin memory is then read
// back eight tokens per cycle: tokens in bins above the cut are kept, tokens
// in the cut bin are kept in index order until the quota is used, and the
// kept lanes are compacted by priority encoding into out_idx[0..out_count-1].
// If fewer than K tokens were offered, all are kept.
//
// Timing: collection at one group per cycle, one scan cycle, then one group
// per cycle of emission; `done` pulses after the last group is emitted.
// Bucketize / prefix-scan / priority-encode follow the paper's description;
// the bin mapping, the number of bins and the tie rule (lowest index first
// within the cut bin) are this design's own.
module topk_selector
  import vita_pkg::*;
#(
  parameter int unsigned MAX_TOKENS = 2048,
  parameter int unsigned NBIN       = 64,
  parameter int unsigned L          = LANES,
  localparam int unsigned IW        = $clog2(MAX_TOKENS),
  localparam int unsigned BW        = $clog2(NBIN),
  localparam int unsigned GW        = $clog2(MAX_TOKENS / L)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,        // clear, begin collecting
  input  logic [IW:0]                k_sel,        // K
  input  logic                       in_valid,
  input  logic                       in_last,
  input  logic [L-1:0]               in_mask,      // lanes holding a real token
  input  logic [L-1:0][SCORE_W-1:0]  in_score,
  output logic                       out_valid,
  output logic [$clog2(L):0]         out_count,
  output logic [L-1:0][IW-1:0]       out_idx,
  output logic                       done,
  output logic                       busy
);

  typedef enum logic [1:0] {S_IDLE, S_COLLECT, S_SCAN, S_EMIT} state_e;
  state_e state;

  logic [L-1:0]          bmask [MAX_TOKENS / L];
  logic [L-1:0][BW-1:0]  bbin  [MAX_TOKENS / L];
  logic [IW:0]           hist  [NBIN];
  logic [GW:0]           n_groups, rd_ptr;
  logic [BW-1:0]         cut;
  logic [IW:0]           quota;

  function automatic logic [BW-1:0] bucket(input logic signed [SCORE_W-1:0] s);
    logic [5:0] p;
    int unsigned b;
    if (s <= 0) return '0;
    p = lead_one32(32'(s));
    b = 1 + 2 * p + ((p > 0) ? int'(s[5'(p-6'd1)]) : 0);
    if (b > NBIN - 1) b = NBIN - 1;
    return BW'(b);
  endfunction

  logic [L-1:0][BW-1:0] in_bin;
  always_comb
    for (int l = 0; l < L; l++) in_bin[l] = bucket($signed(in_score[l]));

  // high-to-low prefix scan for the cut bin
  logic [BW-1:0] scan_cut;
  logic [IW:0]   scan_quota;
  always_comb begin
    logic [IW+1:0] cum;
    logic          found;
    cum = '0; found = 1'b0; scan_cut = '0; scan_quota = '1;   // default: keep all
    for (int b = NBIN - 1; b >= 0; b--) begin
      if (!found && (cum + (IW+2)'(hist[b]) >= (IW+2)'(k_sel))) begin
        found      = 1'b1;
        scan_cut   = BW'(b);
        scan_quota = (IW+1)'((IW+2)'(k_sel) - cum);
      end
      cum += (IW+2)'(hist[b]);
    end
  end

  // emission: select and compact one group per cycle
  logic [L-1:0]          sel;
  logic [IW:0]           eq_taken;
  logic [$clog2(L):0]    cnt;
  logic [L-1:0][IW-1:0]  cidx;
  always_comb begin
    logic [L-1:0]         m;
    logic [L-1:0][BW-1:0] bn;
    m  = bmask[rd_ptr[GW-1:0]];
    bn = bbin[rd_ptr[GW-1:0]];
    eq_taken = '0;
    cnt      = '0;
    cidx     = '0;
    for (int l = 0; l < L; l++) begin
      sel[l] = 1'b0;
      if (m[l] && bn[l] > cut) sel[l] = 1'b1;
      else if (m[l] && bn[l] == cut && eq_taken < quota) begin
        sel[l]   = 1'b1;
        eq_taken = eq_taken + 1'b1;
      end
      if (sel[l]) begin
        cidx[cnt] = IW'(rd_ptr) * IW'(L) + IW'(l);   // priority-encoded compaction
        cnt       = cnt + 1'b1;
      end
    end
  end

  // histogram increments of the incoming group, one count per bin
  logic [IW:0] hist_add [NBIN];
  always_comb
    for (int b = 0; b < NBIN; b++) begin
      hist_add[b] = '0;
      for (int l = 0; l < L; l++)
        if (in_mask[l] && in_bin[l] == BW'(b)) hist_add[b] = hist_add[b] + 1'b1;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_groups <= '0; rd_ptr <= '0; cut <= '0; quota <= '0;
      out_valid <= 1'b0; out_count <= '0; out_idx <= '0; done <= 1'b0;
      for (int b = 0; b < NBIN; b++) hist[b] <= '0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: ;
        S_COLLECT: if (in_valid) begin
          bmask[n_groups[GW-1:0]] <= in_mask;
          bbin[n_groups[GW-1:0]]  <= in_bin;
          n_groups <= n_groups + 1'b1;
          for (int b = 0; b < NBIN; b++) hist[b] <= hist[b] + hist_add[b];
          if (in_last) state <= S_SCAN;
        end
        S_SCAN: begin
          cut    <= scan_cut;
          quota  <= scan_quota;
          rd_ptr <= '0;
          state  <= S_EMIT;
        end
        S_EMIT: begin
          out_valid <= (cnt != 0);
          out_count <= cnt;
          out_idx   <= cidx;
          quota     <= quota - eq_taken;
          rd_ptr    <= rd_ptr + 1'b1;
          if (rd_ptr + 1'b1 == n_groups) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (start) begin
        state    <= S_COLLECT;
        n_groups <= '0;
        for (int b = 0; b < NBIN; b++) hist[b] <= '0;
      end
    end
  end

  assign busy = (state != S_IDLE);

endmodule
