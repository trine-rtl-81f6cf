// bitonic_sorter: first stage of the two-stage top-k engine.
//
// A fully pipelined bitonic network sorts one word of N lanes per cycle into
// descending order. N is matched to the array width CS, as the paper does, so
// one MSE output word enters per cycle and the number of compare-and-swap
// units stays at N/2 per stage. Each element carries a valid bit, a signed key
// (the score) and a payload (its pos(i,j)); invalid elements sort below every
// valid one.
//
// Structure: stages of the standard bitonic network, one register rank per
// stage, log2(N)*(log2(N)+1)/2 stages (15 for N = 32). Stage s compares lanes
// i and i^d (block size b): the pair is put in descending order when i & b
// is 0 and in ascending order otherwise, so the last merge yields a fully
// descending word.
//
// Interface: in_valid/in_* enter when en is high; out_valid/out_* leave
// LAT = log2(N)*(log2(N)+1)/2 enabled cycles later, in order. en = 0 freezes
// the pipeline.
module bitonic_sorter #(
  parameter int unsigned N  = 32,   // lanes, a power of two
  parameter int unsigned KW = 32,   // key width (signed)
  parameter int unsigned PW = 16    // payload width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic [N-1:0]         in_lane_valid,
  input  logic signed [KW-1:0] in_key     [N],
  input  logic [PW-1:0]        in_payload [N],
  output logic                 out_valid,
  output logic [N-1:0]         out_lane_valid,
  output logic signed [KW-1:0] out_key     [N],
  output logic [PW-1:0]        out_payload [N]
);

  localparam int unsigned LGN = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NST = LGN * (LGN + 1) / 2;

  // block size b and distance d of stage s
  function automatic int unsigned stage_b(input int unsigned s);
    int unsigned cnt = 0;
    for (int unsigned p = 1; p <= LGN; p++)
      for (int unsigned q = p; q >= 1; q--) begin
        if (cnt == s) return 1 << p;
        cnt++;
      end
    return 2;
  endfunction

  function automatic int unsigned stage_d(input int unsigned s);
    int unsigned cnt = 0;
    for (int unsigned p = 1; p <= LGN; p++)
      for (int unsigned q = p; q >= 1; q--) begin
        if (cnt == s) return 1 << (q - 1);
        cnt++;
      end
    return 1;
  endfunction

  logic                 sv [NST+1][N];
  logic signed [KW-1:0] sk [NST+1][N];
  logic [PW-1:0]        sp [NST+1][N];
  logic [NST:0]         wv;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      sv[0][i] = in_lane_valid[i];
      sk[0][i] = in_key[i];
      sp[0][i] = in_payload[i];
    end
    wv[0] = in_valid;
  end

  for (genvar s = 0; s < NST; s++) begin : g_stage
    localparam int unsigned B = stage_b(s);
    localparam int unsigned D = stage_d(s);
    for (genvar i = 0; i < N; i++) begin : g_lane
      localparam int unsigned PARTNER = i ^ D;
      localparam bit          LOWER   = (i < PARTNER);
      localparam bit          DESC    = ((i & B) == 0);
      logic a_gt_b;   // this lane's element ranks above the partner's
      logic take_partner;
      assign a_gt_b = sv[s][i] && (!sv[s][PARTNER] || sk[s][i] > sk[s][PARTNER]);
      // The lower lane of a descending pair must hold the larger element.
      assign take_partner = (LOWER == DESC) ? (!a_gt_b && (sv[s][PARTNER] &&
                              (!sv[s][i] || sk[s][PARTNER] > sk[s][i])))
                                            : a_gt_b;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          sv[s+1][i] <= 1'b0;
          sk[s+1][i] <= '0;
          sp[s+1][i] <= '0;
        end else if (en) begin
          sv[s+1][i] <= take_partner ? sv[s][PARTNER] : sv[s][i];
          sk[s+1][i] <= take_partner ? sk[s][PARTNER] : sk[s][i];
          sp[s+1][i] <= take_partner ? sp[s][PARTNER] : sp[s][i];
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) wv[s+1] <= 1'b0;
      else if (en) wv[s+1] <= wv[s];
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      out_lane_valid[i] = sv[NST][i];
      out_key[i]        = sk[NST][i];
      out_payload[i]    = sp[NST][i];
    end
    out_valid = wv[NST];
  end

endmodule
