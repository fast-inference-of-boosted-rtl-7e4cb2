// tb_bdt_ensemble: end-to-end test of the BDT ensemble at its default size
// (100 estimators x 5 classes = 500 trees of depth 4, 16 features, 18-bit
// data), with no parameter overridden.
//
// The testbench reads the same constant model that the hardware is built
// from (the generator functions of bdt_pkg) into tables, and for every
// feature vector computes the five class scores itself by walking each of
// the 500 trees from the root and summing in 32-bit integers. Vectors are
// sent back to back and with gaps; in many of them features are set equal
// to thresholds met on the walk so that "<=" ties occur. Part-way through,
// reset is asserted while vectors are in flight: those results must never
// appear. Every result must match, in order, exactly 12 cycles after its
// input (DEPTH + 1 + ceil(log2 N_ESTIMATORS)).
//
// Mechanisms counted (each must occur): back-to-back inputs (initiation
// interval 1), pipeline bubbles, threshold ties, and the reset flush.
module tb_bdt_ensemble;
  import bdt_pkg::*;

  localparam int unsigned N_TREES = N_ESTIMATORS * N_CLASSES;
  localparam int unsigned LAT     = DEPTH + 1 + $clog2(N_ESTIMATORS);
  localparam int unsigned SUM_W   = DATA_W + $clog2(N_ESTIMATORS);
  localparam int unsigned N_VEC   = 400;
  localparam int unsigned SEED    = 1;

  logic                              clk = 1'b0;
  logic                              rst = 1'b1;
  logic                              in_valid = 1'b0;
  logic [N_FEATURES-1:0][DATA_W-1:0] x = '0;
  logic                              out_valid;
  logic [N_CLASSES-1:0][SUM_W-1:0]   score;

  int cyc = 0;
  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_bubble = 0, n_tie = 0, n_flushed = 0;

  // Model tables.
  int unsigned m_feat [N_TREES][N_NODES];
  int          m_thr  [N_TREES][N_NODES];
  int          m_scr  [N_TREES][N_LEAVES];

  typedef struct {
    int sum [N_CLASSES];
    int cyc;
  } expect_t;
  expect_t exp_q[$];

  bdt_ensemble dut (
    .clk(clk), .rst(rst), .in_valid(in_valid), .x(x), .out_valid(out_valid), .score(score));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sext(input logic [DATA_W-1:0] v);
    return int'($signed({{(32-DATA_W){v[DATA_W-1]}}, v}));
  endfunction

  // Reference: walk every tree and sum per class.
  function automatic void reference(input logic [N_FEATURES-1:0][DATA_W-1:0] xv,
                                    output int sums [N_CLASSES], output bit tie);
    tie = 1'b0;
    for (int c = 0; c < N_CLASSES; c++) sums[c] = 0;
    for (int t = 0; t < N_TREES; t++) begin
      int unsigned n = 0;
      for (int d = 0; d < DEPTH; d++) begin
        int xf;
        xf = sext(xv[m_feat[t][n]]);
        if (xf == m_thr[t][n]) tie = 1'b1;
        n = (xf <= m_thr[t][n]) ? 2 * n + 1 : 2 * n + 2;
      end
      sums[t % N_CLASSES] += m_scr[t][n - N_NODES];
    end
  endfunction

  task automatic check_out();
    if (!out_valid) return;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("FAIL: output with nothing expected at cycle %0d", cyc);
      return;
    end
    begin
      expect_t e;
      e = exp_q.pop_front();
      if (cyc - e.cyc != LAT) begin
        failures++;
        $display("FAIL: latency %0d, expected %0d", cyc - e.cyc, LAT);
      end
      for (int c = 0; c < N_CLASSES; c++) begin
        checks++;
        if (int'($signed(score[c])) != e.sum[c]) begin
          failures++;
          $display("FAIL: class %0d score %0d expected %0d", c, $signed(score[c]), e.sum[c]);
        end
      end
    end
  endtask

  task automatic send_one(input bit valid);
    // Random features; in half the vectors, thresholds met along a random
    // tree's path are copied into the features they are compared with.
    for (int f = 0; f < N_FEATURES; f++) x[f] = DATA_W'($urandom);
    if ($urandom_range(1) == 1) begin
      int unsigned t, n;
      t = $urandom_range(N_TREES - 1);
      n = 0;
      for (int d = 0; d < DEPTH; d++) begin
        if ($urandom_range(1) == 1) x[m_feat[t][n]] = DATA_W'(m_thr[t][n]);
        n = (sext(x[m_feat[t][n]]) <= m_thr[t][n]) ? 2 * n + 1 : 2 * n + 2;
      end
    end
    in_valid = valid;
    if (valid) begin
      expect_t e;
      bit tie;
      reference(x, e.sum, tie);
      e.cyc = cyc;
      if (tie) n_tie++;
      exp_q.push_back(e);
    end
  endtask

  initial begin
    static bit prev_valid = 1'b0;
    static int sent = 0;
    for (int t = 0; t < N_TREES; t++) begin
      for (int n = 0; n < N_NODES; n++) begin
        m_feat[t][n] = model_feature(SEED, t, n, N_FEATURES);
        m_thr[t][n]  = model_threshold(SEED, t, n, DATA_W);
      end
      for (int l = 0; l < N_LEAVES; l++) m_scr[t][l] = model_score(SEED, t, l, DATA_W);
    end
    checks++;
    if (LAT != 12) begin
      failures++;
      $display("FAIL: benchmark latency is %0d cycles, expected 12", LAT);
    end

    repeat (3) @(negedge clk);
    rst = 1'b0;

    while (sent < N_VEC) begin
      bit v;
      @(negedge clk);
      check_out();
      // Bursts of back-to-back vectors with occasional bubbles.
      v = ($urandom_range(4) != 0);
      send_one(v);
      if (v && prev_valid) n_back_to_back++;
      if (!v && prev_valid) n_bubble++;
      prev_valid = v;
      if (v) sent++;

      // Reset flush once, half way: drop everything in flight.
      if (sent == N_VEC / 2 && v) begin
        @(negedge clk);
        check_out();
        in_valid = 1'b0;
        rst = 1'b1;
        n_flushed = exp_q.size();
        exp_q.delete();
        @(negedge clk);
        rst = 1'b0;
        prev_valid = 1'b0;
        checks++;
        if (out_valid) begin
          failures++;
          $display("FAIL: output valid right after reset");
        end
      end
    end
    @(negedge clk);
    check_out();
    in_valid = 1'b0;
    repeat (LAT + 3) begin
      @(negedge clk);
      check_out();
    end
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never came out", exp_q.size());
    end

    $display("mechanisms: back_to_back=%0d bubble=%0d tie=%0d reset_flushed=%0d",
             n_back_to_back, n_bubble, n_tie, n_flushed);
    checks += 4;
    if (n_back_to_back == 0) begin failures++; $display("FAIL: no back-to-back inputs"); end
    if (n_bubble == 0)       begin failures++; $display("FAIL: no bubble");             end
    if (n_tie == 0)          begin failures++; $display("FAIL: no threshold tie");      end
    if (n_flushed == 0)      begin failures++; $display("FAIL: reset flushed nothing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
