// tb_bdt_leaf_lut: self-checking test of the leaf score table.
//
// For a 16-leaf and a 4-leaf table with scores from the model generator,
// every one-hot leaf vector is applied in random order and the output must
// be the score of that leaf.
module tb_bdt_leaf_lut;
  localparam int unsigned W = 18;
  localparam logic [15:0][W-1:0] SC16 = bdt_pkg::tree_scores(5, 11);
  localparam logic [3:0][W-1:0]  SC4  = {18'h00123, 18'h3fedc, 18'h00777, 18'h20001};

  logic [15:0]  act16;
  logic [3:0]   act4;
  logic [W-1:0] score16, score4;
  int checks = 0, failures = 0;

  bdt_leaf_lut #(.N_LEAVES(16), .DATA_W(W), .SCORE(SC16)) u_dut16 (.leaf_act(act16), .score(score16));
  bdt_leaf_lut #(.N_LEAVES(4),  .DATA_W(W), .SCORE(SC4))  u_dut4  (.leaf_act(act4),  .score(score4));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      int unsigned i16, i4;
      i16 = (r < 16) ? r : $urandom_range(15);
      i4  = (r < 4)  ? r : $urandom_range(3);
      act16 = 16'b1 << i16;
      act4  = 4'b1 << i4;
      #1;
      checks += 2;
      if (score16 !== SC16[i16]) begin
        failures++;
        $display("FAIL 16-leaf: leaf %0d score %h expected %h", i16, score16, SC16[i16]);
      end
      if (score4 !== SC4[i4]) begin
        failures++;
        $display("FAIL 4-leaf: leaf %0d score %h expected %h", i4, score4, SC4[i4]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
