// topk_merger: second stage of the two-stage top-k engine (C_S -> k merge).
//
// Words arrive already sorted (descending) by the bitonic stage, N lanes at a
// time, and belong to one selection group from in_first to in_last. The merger
// keeps a sorted list of the best KMAX elements seen in the group and merges
// each incoming word into it in one cycle, so the engine accepts one word per
// cycle (near-streaming, as the paper intends). After the last word it emits
// the first k entries of the list as ceil(k/N) words of N lanes, each lane
// with its value and pos(i,j); lanes past k are marked invalid.
//
// Merge: both inputs are sorted, so word element q lands at rank
// q + #{list entries >= it} (the list wins ties), and output position r takes
// the word element whose rank is r if there is one, otherwise list entry
// r - t, t being the number of word elements ranked at or before r.
// Optional threshold: with thr_en, elements with a key below thr are dropped
// before the merge (the paper mentions programmable pruning thresholds; how
// they act is this design's choice).
//
// Interface: in_ready is low while results are emitted. Timing: a merge takes
// one cycle per word; emission starts the cycle after the last word and lasts
// ceil(k/N) cycles, out_last marking the final word.
module topk_merger #(
  parameter int unsigned N    = 32,    // lanes per word (array width CS)
  parameter int unsigned KMAX = 256,   // largest k (paper: Max-k = 256)
  parameter int unsigned KW   = 32,
  parameter int unsigned PW   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(KMAX+1)-1:0] k,
  input  logic                     thr_en,
  input  logic signed [KW-1:0]     thr,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [N-1:0]             in_lane_valid,
  input  logic signed [KW-1:0]     in_key     [N],
  input  logic [PW-1:0]            in_payload [N],
  output logic                     out_valid,
  output logic                     out_last,
  output logic [N-1:0]             out_lane_valid,
  output logic signed [KW-1:0]     out_key     [N],
  output logic [PW-1:0]            out_payload [N]
);

  localparam int unsigned RW = $clog2(KMAX + N + 1);
  localparam int unsigned NWORDS = (KMAX + N - 1) / N;
  localparam int unsigned WB = (NWORDS > 1) ? $clog2(NWORDS) : 1;

  logic                 lv [KMAX];
  logic signed [KW-1:0] lk [KMAX];
  logic [PW-1:0]        lp [KMAX];

  logic                 bv [N];
  logic [RW-1:0]        rank_b [N];
  logic                 mv [KMAX];
  logic signed [KW-1:0] mk [KMAX];
  logic [PW-1:0]        mp [KMAX];

  logic          emitting;
  logic [WB-1:0] ecnt;
  logic [WB-1:0] elast;

  assign in_ready = !emitting;

  // ---- merge network ----
  always_comb begin
    for (int q = 0; q < N; q++) begin
      bv[q] = in_lane_valid[q] && (!thr_en || in_key[q] >= thr);
    end
    for (int q = 0; q < N; q++) begin
      int unsigned cnt;
      cnt = q;
      for (int p = 0; p < KMAX; p++) begin
        if (!in_first && lv[p] && (!bv[q] || lk[p] >= in_key[q])) cnt++;
      end
      rank_b[q] = RW'(cnt);
    end
    for (int r = 0; r < KMAX; r++) begin
      int unsigned t;
      t = 0;
      for (int q = 0; q < N; q++) if (int'(rank_b[q]) <= r) t++;
      if (t > 0 && int'(rank_b[t-1]) == r) begin
        mv[r] = bv[t-1];
        mk[r] = in_key[t-1];
        mp[r] = in_payload[t-1];
      end else begin
        mv[r] = !in_first && lv[r-t];
        mk[r] = lk[r-t];
        mp[r] = lp[r-t];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < KMAX; r++) begin
        lv[r] <= 1'b0;
        lk[r] <= '0;
        lp[r] <= '0;
      end
      emitting <= 1'b0;
      ecnt     <= '0;
      elast    <= '0;
    end else begin
      if (in_valid && in_ready) begin
        for (int r = 0; r < KMAX; r++) begin
          lv[r] <= mv[r];
          lk[r] <= mk[r];
          lp[r] <= mp[r];
        end
        if (in_last) begin
          emitting <= 1'b1;
          ecnt     <= '0;
          elast    <= WB'((int'(k) + N - 1) / N - 1);
        end
      end else if (emitting) begin
        ecnt <= ecnt + 1'b1;
        if (ecnt == elast) emitting <= 1'b0;
      end
    end
  end

  // ---- emission: word ecnt holds list entries ecnt*N .. ecnt*N+N-1 ----
  always_comb begin
    for (int l = 0; l < N; l++) begin
      int unsigned idx;
      idx = int'(ecnt) * N + l;
      if (idx < KMAX) begin
        out_lane_valid[l] = lv[idx] && (idx < int'(k));
        out_key[l]        = lk[idx];
        out_payload[l]    = lp[idx];
      end else begin
        out_lane_valid[l] = 1'b0;
        out_key[l]        = '0;
        out_payload[l]    = '0;
      end
    end
    out_valid = emitting;
    out_last  = emitting && (ecnt == elast);
  end

endmodule
