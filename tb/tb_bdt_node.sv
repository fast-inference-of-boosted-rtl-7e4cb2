// tb_bdt_node: self-checking test of the decision node comparator.
//
// Four nodes with different features and thresholds (a typical one, the
// most negative, the most positive and zero) see random feature vectors,
// and vectors in which the compared feature equals the threshold or is one
// step either side of it. The expected result is an integer comparison
// done here on sign-extended values.
module tb_bdt_node;
  localparam int unsigned NF = 16;
  localparam int unsigned W  = 18;
  localparam int unsigned NN = 4;
  localparam logic [NN-1:0][3:0]   FEAT = {4'd15, 4'd0, 4'd9, 4'd3};
  localparam logic [NN-1:0][W-1:0] THR  = {18'sd0, 18'h1ffff, 18'h20000, 18'h3f123};

  logic [NF-1:0][W-1:0] x;
  logic [NN-1:0]        cmp;
  int checks = 0, failures = 0;

  for (genvar i = 0; i < NN; i++) begin : g_dut
    bdt_node #(.N_FEATURES(NF), .DATA_W(W), .FEATURE(FEAT[i]), .THRESHOLD(THR[i]))
      u_dut (.x(x), .cmp(cmp[i]));
  end

  function automatic int sext(input logic [W-1:0] v);
    return int'($signed({{(32-W){v[W-1]}}, v}));
  endfunction

  task automatic check_all();
    #1;
    for (int i = 0; i < NN; i++) begin
      logic exp_cmp;
      exp_cmp = sext(x[FEAT[i]]) <= sext(THR[i]);
      checks++;
      if (cmp[i] !== exp_cmp) begin
        failures++;
        $display("FAIL node %0d: x=%0d t=%0d cmp=%0b exp=%0b", i, sext(x[FEAT[i]]),
                 sext(THR[i]), cmp[i], exp_cmp);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 400; r++) begin
      for (int f = 0; f < NF; f++) x[f] = W'($urandom);
      check_all();
    end
    // Ties and neighbours of every threshold.
    for (int i = 0; i < NN; i++) begin
      for (int d = -1; d <= 1; d++) begin
        for (int f = 0; f < NF; f++) x[f] = W'($urandom);
        x[FEAT[i]] = W'(sext(THR[i]) + d);
        check_all();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
