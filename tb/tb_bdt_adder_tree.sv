// tb_bdt_adder_tree: self-checking test of the pipelined balanced adder
// tree.
//
// Three adder trees are tested side by side: 100 inputs (the benchmark's
// trees per class), 7 and 5 inputs (odd counts at several levels). Inputs
// are random signed 18-bit scores, with some vectors of all-maximum and
// all-minimum values to show that the full-precision sum cannot overflow.
// Each sum is compared with one formed here in 32-bit integers and must
// appear exactly ceil(log2 N) cycles after its input, in order.
module tb_bdt_adder_tree;
  localparam int unsigned W = 18;
  localparam int unsigned N_VEC = 2000;

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

  for (genvar g = 0; g < 3; g++) begin : g_cfg
    localparam int unsigned N   = (g == 0) ? 100 : (g == 1) ? 7 : 5;
    localparam int unsigned LAT = $clog2(N);
    localparam int unsigned OW  = W + LAT;

    logic                 in_valid, out_valid;
    logic [N-1:0][W-1:0]  in;
    logic signed [OW-1:0] sum;
    int                   exp_q[$];
    int                   cyc_q[$];

    bdt_adder_tree #(.N_IN(N), .IN_W(W)) u_dut (
      .clk(clk), .rst(rst), .in_valid(in_valid), .in(in), .out_valid(out_valid), .sum(sum));

    task automatic check_out();
      if (out_valid) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL N=%0d: unexpected output", N);
        end else begin
          int e, c0;
          e  = exp_q.pop_front();
          c0 = cyc_q.pop_front();
          if (int'(sum) != e || cyc - c0 != LAT) begin
            failures++;
            $display("FAIL N=%0d: sum %0d exp %0d, latency %0d exp %0d", N, sum, e, cyc - c0, LAT);
          end
        end
      end
    endtask

    initial begin
      automatic int sent = 0;
      in_valid = 1'b0;
      in = '0;
      repeat (3) @(negedge clk);
      rst = 1'b0;
      while (sent < N_VEC) begin
        @(negedge clk);
        check_out();
        in_valid = ($urandom_range(3) != 0);
        for (int i = 0; i < N; i++) begin
          case (sent % 50)
            10:      in[i] = {1'b0, {(W-1){1'b1}}};   // all at the maximum
            20:      in[i] = {1'b1, {(W-1){1'b0}}};   // all at the minimum
            default: in[i] = W'($urandom);
          endcase
        end
        if (in_valid) begin
          automatic int e = 0;
          for (int i = 0; i < N; i++) e += int'($signed(in[i]));
          exp_q.push_back(e);
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
      if (exp_q.size() != 0) begin
        failures++;
        $display("FAIL N=%0d: %0d sums never came out", N, exp_q.size());
      end
      done_cnt++;
    end
  end

  initial begin
    wait (done_cnt == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
