// bdt_adder_tree: pipelined balanced adder tree that sums N_IN signed
// scores, one per decision tree of a class.
//
// Level 0 is the inputs, sign-extended to the output width. Each level
// adds neighbouring pairs of the level above (operands 2i and 2i+1 give
// result i); when a level has an odd count, its last operand passes to the
// next level unchanged. Every level is registered, so there are
// L = ceil(log2 N_IN) levels and the same number of clock cycles of
// latency. The sum is carried at full precision, OUT_W = IN_W +
// ceil(log2 N_IN) bits by default, so it cannot overflow. A valid bit
// travels alongside; only the valid bits are reset.
//
// The balanced adder tree, and a latency that grows with its depth, follow
// the design. One register per level, the pass-through of an odd operand
// and the full-precision width are this implementation's choices.
//
// Interface: clk, rst (synchronous, active high), in_valid, in (N_IN signed
// IN_W-bit words) in; out_valid, sum (signed OUT_W bits) out.
// Timing: sum and out_valid appear L clock edges after the edge that
// samples in (L = 0 for N_IN = 1: the sum is then the input, unregistered).
// A new input may be presented every cycle.
module bdt_adder_tree #(
  parameter int unsigned N_IN  = bdt_pkg::N_ESTIMATORS,
  parameter int unsigned IN_W  = bdt_pkg::DATA_W,
  parameter int unsigned OUT_W = IN_W + ((N_IN > 1) ? $clog2(N_IN) : 0)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [N_IN-1:0][IN_W-1:0]   in,
  output logic                        out_valid,
  output logic signed [OUT_W-1:0]     sum
);

  localparam int unsigned LEVELS = (N_IN > 1) ? $clog2(N_IN) : 0;

  // Number of operands at level k: ceil(N_IN / 2^k).
  function automatic int unsigned width_at(input int unsigned k);
    return (N_IN + (1 << k) - 1) >> k;
  endfunction

  for (genvar k = 0; k <= LEVELS; k++) begin : g_level
    // Operands of level k; entries from width_at(k) up are unused and zero.
    logic signed [OUT_W-1:0] ops [N_IN];
    logic                    valid;
    if (k == 0) begin : g_in
      always_comb begin
        for (int unsigned i = 0; i < N_IN; i++)
          ops[i] = OUT_W'($signed(in[i]));
      end
      assign valid = in_valid;
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int unsigned i = 0; i < N_IN; i++) begin
          if (i >= width_at(k))
            ops[i] <= '0;
          else if (2 * i + 1 < width_at(k - 1))
            ops[i] <= g_level[k-1].ops[2*i] + g_level[k-1].ops[2*i+1];
          else
            ops[i] <= g_level[k-1].ops[2*i];
        end
      end
      always_ff @(posedge clk) begin
        if (rst) valid <= 1'b0;
        else     valid <= g_level[k-1].valid;
      end
    end
  end

  assign sum       = g_level[LEVELS].ops[0];
  assign out_valid = g_level[LEVELS].valid;

endmodule
