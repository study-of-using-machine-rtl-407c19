// adder_tree -- pipelined binary adder tree summing N_IN signed numbers.
//
// Level 1 has N_IN/2 two-input adders, level 2 half as many, and so on until
// a single adder gives the total at level LEVELS; every level ends in a
// register, so the sum leaves LEVELS clock edges after the inputs are
// sampled and a new set can enter every clock. For the paper's 32 inputs
// this is 16, 8, 4, 2 and 1 adders and a latency of 5. Each level is one bit
// wider than the one before, so the sum cannot overflow (the widths are this
// design's choice). N_IN must be 2**LEVELS.
module adder_tree #(
  parameter int unsigned N_IN   = 32,
  parameter int unsigned W_IN   = 20,
  parameter int unsigned LEVELS = $clog2(N_IN)
) (
  input  logic                          clk,
  input  logic signed [W_IN-1:0]        din [N_IN],
  output logic signed [W_IN+LEVELS-1:0] sum
);

  localparam int unsigned W_OUT = W_IN + LEVELS;

  // lvl[l][j]: node j of level l (level 0 = the inputs). Kept at full output
  // width; level l only uses its low W_IN+l bits meaningfully.
  logic signed [W_OUT-1:0] lvl [LEVELS+1][N_IN];

  always_comb begin
    for (int unsigned j = 0; j < N_IN; j++)
      lvl[0][j] = W_OUT'(din[j]);
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    localparam int unsigned N_NODE = N_IN >> l;
    for (genvar j = 0; j < N_IN; j++) begin : g_node
      if (j < N_NODE) begin : g_add
        always_ff @(posedge clk)
          lvl[l][j] <= lvl[l-1][2*j] + lvl[l-1][2*j+1];
      end else begin : g_unused
        assign lvl[l][j] = '0;
      end
    end
  end

  assign sum = lvl[LEVELS][0];

  initial begin
    assert (N_IN == (1 << LEVELS))
      else $error("adder_tree: N_IN (%0d) must be 2**LEVELS (%0d)", N_IN, LEVELS);
  end

endmodule
