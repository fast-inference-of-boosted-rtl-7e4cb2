// tb_bdt_tree: self-checking test of one pipelined decision tree.
//
// Two trees are tested side by side: depth 2 (the size of the schematic
// example) and depth 4 (the benchmark size), each with features,
// thresholds and scores from the model generator. Feature vectors arrive
// with random gaps and often back to back; in half of them one feature is
// set to a node's threshold or one step from it, so that ties of the "<="
// are exercised. The expected score comes from walking the tree node by
// node (node n -> 2n+1 if x <= t, else 2n+2), a different procedure from
// the hardware's parallel activations. Every result must appear exactly
// DEPTH+1 cycles after its input, in order, and no other output may be
// valid.
module tb_bdt_tree;
  localparam int unsigned NF = 16;
  localparam int unsigned W  = 18;
  localparam int unsigned N_VEC = 3000;

  logic clk = 1'b0;
  logic rst = 1'b1;
  int   cyc = 0;
  int   checks = 0, failures = 0;
  int   done_cnt = 0;
  int   ties = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model of tree `tree` of seed 7 at depth up to 4 (15 nodes, 16 leaves).
  function automatic logic [15:0][3:0] feats(input int unsigned tree);
    for (int unsigned n = 0; n < 16; n++) feats[n] = 4'(bdt_pkg::model_feature(7, tree, n, NF));
  endfunction
  function automatic logic [15:0][W-1:0] thrs(input int unsigned tree);
    for (int unsigned n = 0; n < 16; n++) thrs[n] = W'(bdt_pkg::model_threshold(7, tree, n, W));
  endfunction
  function automatic logic [15:0][W-1:0] scrs(input int unsigned tree);
    for (int unsigned l = 0; l < 16; l++) scrs[l] = W'(bdt_pkg::model_score(7, tree, l, W));
  endfunction

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int unsigned D   = (g == 0) ? 2 : 4;
    localparam int unsigned NN  = 2 ** D - 1;
    localparam int unsigned NL  = 2 ** D;
    localparam int unsigned TREE = 3 + g;

    localparam logic [15:0][3:0]   FA = feats(TREE);
    localparam logic [15:0][W-1:0] TA = thrs(TREE);
    localparam logic [15:0][W-1:0] SA = scrs(TREE);
    localparam logic [NN-1:0][3:0]   F = FA[NN-1:0];
    localparam logic [NN-1:0][W-1:0] T = TA[NN-1:0];
    localparam logic [NL-1:0][W-1:0] S = SA[NL-1:0];

    logic                 in_valid, out_valid;
    logic [NF-1:0][W-1:0] x;
    logic [W-1:0]         score;
    int                   exp_q[$];
    int                   cyc_q[$];
    int                   leaf_hits[NL];

    bdt_tree #(.N_FEATURES(NF), .DEPTH(D), .DATA_W(W), .FEATURE(F), .THRESHOLD(T), .SCORE(S))
      u_dut (.clk(clk), .rst(rst), .in_valid(in_valid), .x(x), .out_valid(out_valid), .score(score));

    function automatic int sext(input logic [W-1:0] v);
      return int'($signed({{(32-W){v[W-1]}}, v}));
    endfunction

    // Reference: walk from the root to a leaf.
    function automatic int unsigned walk(input logic [NF-1:0][W-1:0] xv, output bit tie);
      int unsigned n = 0;
      tie = 1'b0;
      for (int unsigned d = 0; d < D; d++) begin
        if (sext(xv[F[n]]) == sext(T[n])) tie = 1'b1;
        n = (sext(xv[F[n]]) <= sext(T[n])) ? 2 * n + 1 : 2 * n + 2;
      end
      return n - NN;
    endfunction

    initial begin
      automatic int sent = 0;
      in_valid = 1'b0;
      x = '0;
      repeat (3) @(negedge clk);
      rst = 1'b0;
      while (sent < N_VEC) begin
        @(negedge clk);
        // Check what the tree produced at the last edge.
        if (out_valid) begin
          checks++;
          if (exp_q.size() == 0) begin
            failures++;
            $display("FAIL depth %0d: unexpected output", D);
          end else begin
            int e, c0;
            e  = exp_q.pop_front();
            c0 = cyc_q.pop_front();
            if (sext(score) != e || cyc - c0 != D + 1) begin
              failures++;
              $display("FAIL depth %0d: score %0d exp %0d, latency %0d exp %0d",
                       D, sext(score), e, cyc - c0, D + 1);
            end
          end
        end
        // Present the next input.
        in_valid = ($urandom_range(3) != 0);
        for (int f = 0; f < NF; f++) x[f] = W'($urandom);
        if ($urandom_range(1) == 1) begin
          int unsigned n;
          n = $urandom_range(NN - 1);
          x[F[n]] = W'(sext(T[n]) + $urandom_range(2) - 1);
        end
        if (in_valid) begin
          int unsigned leaf;
          bit tie;
          leaf = walk(x, tie);
          if (tie) ties++;
          leaf_hits[leaf]++;
          exp_q.push_back(sext(S[leaf]));
          cyc_q.push_back(cyc);
          sent++;
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      // Drain.
      repeat (D + 3) begin
        if (out_valid) begin
          int e, c0;
          checks++;
          e  = exp_q.pop_front();
          c0 = cyc_q.pop_front();
          if (sext(score) != e || cyc - c0 != D + 1) begin
            failures++;
            $display("FAIL depth %0d drain: score %0d exp %0d, latency %0d", D, sext(score), e, cyc - c0);
          end
        end
        @(negedge clk);
      end
      checks++;
      if (exp_q.size() != 0) begin
        failures++;
        $display("FAIL depth %0d: %0d results never came out", D, exp_q.size());
      end
      begin
        automatic int reached = 0;
        foreach (leaf_hits[l]) if (leaf_hits[l] > 0) reached++;
        $display("depth %0d: %0d of %0d leaves reached", D, reached, NL);
        checks++;
        if (reached < NL / 2) begin
          failures++;
          $display("FAIL depth %0d: too few leaves reached", D);
        end
      end
      done_cnt++;
    end
  end

  initial begin
    wait (done_cnt == 2);
    $display("threshold ties exercised: %0d", ties);
    checks++;
    if (ties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
