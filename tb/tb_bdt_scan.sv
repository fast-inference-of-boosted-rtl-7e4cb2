// tb_bdt_scan: the ensemble at the sizes of the published depth and
// estimator scans.
//
// Six ensembles run side by side: 10 estimators at depth 2, 3, 5 and 6
// (depth scan) and 50 and 150 estimators at depth 3 (estimator scan), all
// with 5 classes, 16 features and 18-bit data. Each sees random feature
// vectors with gaps. Its class scores are checked against a reference that
// walks every tree and sums per class. Its latency must be
// DEPTH + 1 + ceil(log2 N_ESTIMATORS) cycles: one cycle more per level of
// depth, one more per doubling of the estimators.
module tb_bdt_scan;
  localparam int unsigned NF = 16;
  localparam int unsigned NC = 5;
  localparam int unsigned W  = 18;
  localparam int unsigned N_CFG = 6;
  localparam int unsigned N_VEC = 60;

  logic clk = 1'b0;
  logic rst = 1'b1;
  int   cyc = 0;
  int   checks = 0, failures = 0;
  int   done_cnt = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sext(input logic [W-1:0] v);
    return int'($signed({{(32-W){v[W-1]}}, v}));
  endfunction

  // Reference score of class c: walk every tree of the class and sum.
  function automatic int ref_score(input logic [NF-1:0][W-1:0] xv, input int unsigned ne,
                                   input int unsigned d, input int unsigned c);
    int sum = 0;
    for (int unsigned e = 0; e < ne; e++) begin
      int unsigned t, n;
      t = e * NC + c;
      n = 0;
      for (int unsigned k = 0; k < d; k++) begin
        n = (sext(xv[bdt_pkg::model_feature(1, t, n, NF)]) <=
             int'(bdt_pkg::model_threshold(1, t, n, W))) ? 2 * n + 1 : 2 * n + 2;
      end
      sum += int'(bdt_pkg::model_score(1, t, n - (2 ** d - 1), W));
    end
    return sum;
  endfunction

  for (genvar g = 0; g < N_CFG; g++) begin : g_cfg
    localparam int unsigned NE  = (g < 4) ? 10 : (g == 4) ? 50 : 150;
    localparam int unsigned D   = (g == 0) ? 2 : (g == 1) ? 3 : (g == 2) ? 5 : (g == 3) ? 6 : 3;
    localparam int unsigned LAT = D + 1 + $clog2(NE);
    localparam int unsigned SW  = W + $clog2(NE);

    logic                    in_valid, out_valid;
    logic [NF-1:0][W-1:0]    x;
    logic [NC-1:0][SW-1:0]   score;
    int                      exp_q[$];
    int                      cyc_q[$];

    bdt_ensemble #(.N_FEATURES(NF), .N_CLASSES(NC), .N_ESTIMATORS(NE), .DEPTH(D), .DATA_W(W))
      u_dut (.clk(clk), .rst(rst), .in_valid(in_valid), .x(x), .out_valid(out_valid), .score(score));

    task automatic check_out();
      if (out_valid) begin
        int c0;
        checks++;
        if (cyc_q.size() == 0) begin
          failures++;
          $display("FAIL NE=%0d D=%0d: unexpected output", NE, D);
          return;
        end
        c0 = cyc_q.pop_front();
        if (cyc - c0 != LAT) begin
          failures++;
          $display("FAIL NE=%0d D=%0d: latency %0d expected %0d", NE, D, cyc - c0, LAT);
        end
        for (int c = 0; c < NC; c++) begin
          int e;
          e = exp_q.pop_front();
          checks++;
          if (int'($signed(score[c])) != e) begin
            failures++;
            $display("FAIL NE=%0d D=%0d class %0d: %0d expected %0d", NE, D, c, $signed(score[c]), e);
          end
        end
      end
    endtask

    initial begin
      automatic int sent = 0;
      in_valid = 1'b0;
      x = '0;
      repeat (3) @(negedge clk);
      rst = 1'b0;
      while (sent < N_VEC) begin
        @(negedge clk);
        check_out();
        in_valid = ($urandom_range(3) != 0);
        for (int f = 0; f < NF; f++) x[f] = W'($urandom);
        if (in_valid) begin
          for (int c = 0; c < NC; c++) exp_q.push_back(ref_score(x, NE, D, c));
          cyc_q.push_back(cyc);
          sent++;
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
      if (cyc_q.size() != 0) begin
        failures++;
        $display("FAIL NE=%0d D=%0d: %0d results never came out", NE, D, cyc_q.size());
      end
      $display("NE=%0d depth=%0d: latency %0d cycles checked", NE, D, LAT);
      done_cnt++;
    end
  end

  initial begin
    wait (done_cnt == N_CFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
