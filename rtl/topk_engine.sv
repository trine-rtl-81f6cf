// topk_engine: the width-matched, two-stage in-stream top-k unit of an RPU.
//
// Words of N = CS lanes stream in from the MSE (through the bottom feed
// scheduler), one per cycle, each lane a 32-bit score tagged with
// pos(i,j) = (in_row, in_col_base + lane). Following the paper's Fig. 1(b) and Fig. 2:
//   1. an N-lane pipelined bitonic sorter (or a bypass) orders each word,
//   2. the words go into the center buffer (CB), a FIFO,
//   3. a row-wise merge sorter (or a bypass) reads the CB and keeps the k best
//      entries of a selection group (in_first .. in_last); its output values go
//      on to the nonlinear units and the bottom buffer, and the positions to the
//      sparse queue buffer (SQB).
// Sorting and merging are switched by sort_en and topk_en (set per
// instruction block); selecting top-k requires both, since the merger needs
// sorted words. The CB decouples the MSE from the pauses of the merger while it
// emits results, so pruning does not stall the array.
//
// Flow control: in_ready falls when the CB has fewer than AF_MARGIN free
// words; the producer must then stop issuing new work (words already in
// flight still fit). The output has no back-pressure.
// Latency: sorter LAT = log2(N)(log2(N)+1)/2 cycles (0 when bypassed), CB one
// cycle, merger one cycle per word plus ceil(k/N) cycles of emission.
module topk_engine
  import trine_pkg::*;
#(
  parameter int unsigned N         = 32,
  parameter int unsigned KMAX      = 256,
  parameter int unsigned CB_DEPTH  = 256,
  parameter int unsigned AF_MARGIN = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration, stable while a kernel runs
  input  logic                      sort_en,
  input  logic                      topk_en,
  input  logic [$clog2(KMAX+1)-1:0] k,
  input  logic                      thr_en,
  input  logic signed [ACC_W-1:0]   thr,
  // input stream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [ROW_W-1:0]          in_row,
  input  logic [COLI_W-1:0]         in_col_base,
  input  logic [N-1:0]              in_lane_valid,
  input  logic signed [ACC_W-1:0]   in_val [N],
  // output stream
  output logic                      out_valid,
  output logic                      out_last,
  output logic [N-1:0]              out_lane_valid,
  output logic signed [ACC_W-1:0]   out_val [N],
  output pos_t                      out_pos [N],
  output logic                      busy
);

  localparam int unsigned PW  = $bits(pos_t);
  localparam int unsigned LGN = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned LAT = LGN * (LGN + 1) / 2;

  // ---- stage 1: bitonic sorter with bypass ----
  logic [PW-1:0]            in_pay [N];
  logic                     s_valid;
  logic [N-1:0]             s_lv;
  logic signed [ACC_W-1:0]  s_key [N];
  logic [PW-1:0]            s_pay [N];
  logic [1:0]               fl_pipe [LAT];

  always_comb
    for (int l = 0; l < N; l++) in_pay[l] = {in_row, in_col_base + COLI_W'(l)};

  bitonic_sorter #(.N(N), .KW(ACC_W), .PW(PW)) u_sort (
    .clk, .rst_n, .en(1'b1),
    .in_valid      (in_valid && sort_en),
    .in_lane_valid (in_lane_valid),
    .in_key        (in_val),
    .in_payload    (in_pay),
    .out_valid     (s_valid),
    .out_lane_valid(s_lv),
    .out_key       (s_key),
    .out_payload   (s_pay)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) fl_pipe[s] <= '0;
    end else begin
      fl_pipe[0] <= {in_first, in_last};
      for (int s = 1; s < LAT; s++) fl_pipe[s] <= fl_pipe[s-1];
    end
  end

  // ---- center buffer ----
  typedef struct packed {
    logic                          first;
    logic                          last;
    logic [N-1:0]                  lv;
    logic [N-1:0][ACC_W-1:0]       key;
    logic [N-1:0][PW-1:0]          pay;
  } cb_word_t;

  cb_word_t cb_wdata, cb_rdata;
  logic     cb_we, cb_re, cb_full, cb_empty, cb_af;
  logic [$clog2(CB_DEPTH+1)-1:0] cb_count;

  always_comb begin
    cb_wdata = '0;
    if (sort_en) begin
      cb_we          = s_valid;
      cb_wdata.first = fl_pipe[LAT-1][1];
      cb_wdata.last  = fl_pipe[LAT-1][0];
      cb_wdata.lv    = s_lv;
      for (int l = 0; l < N; l++) begin
        cb_wdata.key[l] = s_key[l];
        cb_wdata.pay[l] = s_pay[l];
      end
    end else begin
      cb_we          = in_valid;
      cb_wdata.first = in_first;
      cb_wdata.last  = in_last;
      cb_wdata.lv    = in_lane_valid;
      for (int l = 0; l < N; l++) begin
        cb_wdata.key[l] = in_val[l];
        cb_wdata.pay[l] = in_pay[l];
      end
    end
  end

  sync_fifo #(.W($bits(cb_word_t)), .DEPTH(CB_DEPTH), .AF_MARGIN(AF_MARGIN)) u_cb (
    .clk, .rst_n,
    .wr_en      (cb_we),
    .wr_data    (cb_wdata),
    .rd_en      (cb_re),
    .rd_data    (cb_rdata),
    .full       (cb_full),
    .empty      (cb_empty),
    .almost_full(cb_af),
    .count      (cb_count)
  );

  assign in_ready = !cb_af;

  // ---- stage 2: merge sorter with bypass ----
  logic                    m_ready, m_valid, m_last;
  logic [N-1:0]            m_lv;
  logic signed [ACC_W-1:0] m_key [N];
  logic [PW-1:0]           m_pay [N];
  logic signed [ACC_W-1:0] r_key [N];
  logic [PW-1:0]           r_pay [N];

  always_comb
    for (int l = 0; l < N; l++) begin
      r_key[l] = cb_rdata.key[l];
      r_pay[l] = cb_rdata.pay[l];
    end

  topk_merger #(.N(N), .KMAX(KMAX), .KW(ACC_W), .PW(PW)) u_merge (
    .clk, .rst_n,
    .k, .thr_en, .thr,
    .in_valid      (!cb_empty && topk_en),
    .in_ready      (m_ready),
    .in_first      (cb_rdata.first),
    .in_last       (cb_rdata.last),
    .in_lane_valid (cb_rdata.lv),
    .in_key        (r_key),
    .in_payload    (r_pay),
    .out_valid     (m_valid),
    .out_last      (m_last),
    .out_lane_valid(m_lv),
    .out_key       (m_key),
    .out_payload   (m_pay)
  );

  assign cb_re = !cb_empty && (!topk_en || m_ready);

  always_comb begin
    if (topk_en) begin
      out_valid      = m_valid;
      out_last       = m_last;
      out_lane_valid = m_lv;
      for (int l = 0; l < N; l++) begin
        out_val[l] = m_key[l];
        out_pos[l] = pos_t'(m_pay[l]);
      end
    end else begin
      out_valid      = !cb_empty;
      out_last       = cb_rdata.last;
      out_lane_valid = cb_rdata.lv;
      for (int l = 0; l < N; l++) begin
        out_val[l] = r_key[l];
        out_pos[l] = pos_t'(r_pay[l]);
      end
    end
  end

  // words inside the sorter pipeline
  logic [$clog2(LAT+2)-1:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + $bits(inflight)'(in_valid && sort_en)
                              - $bits(inflight)'(s_valid);
  end

  assign busy = !cb_empty || m_valid || (inflight != '0);

endmodule
