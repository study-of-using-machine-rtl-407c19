// neuron -- one perceptron: y = f(sum_i w[i]*x[i] + b).
//
// N_IN pipelined multipliers (dsp_mult, 3 stages) form the products in
// parallel; the products and the bias go into a 32-leaf pipelined adder tree
// (adder_tree, 5 stages), the unused leaves held at zero. With RELU = 1 the
// tree output passes through a relu (hidden layer), with RELU = 0 it is the
// raw score (output layer, whose softmax is replaced by a comparison after
// it). The bias is delayed by the multiplier latency so that it is summed
// with the products of the same input set, and it enters the tree with the
// same LSB alignment as the products.
//
// Timing: y and out_valid follow x and in_valid by MULT_STAGES + tree levels
// = 3 + 5 = 8 clock edges; a new x may be presented every clock. Weights and
// bias are constants in the trigger but are ports here so one module serves
// all 22 neurons. The 20 multipliers, the tree and the ReLU follow the paper;
// the valid bit and the bias delay are this design's.
module neuron #(
  parameter int unsigned N_IN    = 20,
  parameter int unsigned W_X     = 8,
  parameter int unsigned W_W     = 12,
  parameter bit          RELU    = 1'b1,
  parameter int unsigned TREE_IN = 32,
  parameter int unsigned M_STAGES = 3,
  localparam int unsigned LEVELS = $clog2(TREE_IN),
  localparam int unsigned W_P    = W_X + W_W,
  localparam int unsigned W_Y    = W_P + LEVELS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [W_X-1:0] x [N_IN],
  input  logic signed [W_W-1:0] w [N_IN],
  input  logic signed [W_W-1:0] b,
  output logic                  out_valid,
  output logic signed [W_Y-1:0] y
);

  localparam int unsigned LATENCY = M_STAGES + LEVELS;

  logic signed [W_P-1:0] prod [N_IN];
  logic signed [W_P-1:0] leaf [TREE_IN];
  logic signed [W_W-1:0] b_dly [M_STAGES];
  logic signed [W_Y-1:0] sum;
  logic [LATENCY-1:0]    vld_sr;

  for (genvar i = 0; i < N_IN; i++) begin : g_mult
    dsp_mult #(.W_A(W_X), .W_B(W_W)) u_mult (
      .clk (clk),
      .a   (x[i]),
      .b   (w[i]),
      .p   (prod[i])
    );
  end

  // Bias travels beside the multipliers.
  always_ff @(posedge clk) begin
    b_dly[0] <= b;
    for (int unsigned s = 1; s < M_STAGES; s++)
      b_dly[s] <= b_dly[s-1];
  end

  always_comb begin
    for (int unsigned j = 0; j < TREE_IN; j++) begin
      if (j < N_IN)       leaf[j] = prod[j];
      else if (j == N_IN) leaf[j] = W_P'(b_dly[M_STAGES-1]);
      else                leaf[j] = '0;
    end
  end

  adder_tree #(.N_IN(TREE_IN), .W_IN(W_P), .LEVELS(LEVELS)) u_tree (
    .clk (clk),
    .din (leaf),
    .sum (sum)
  );

  if (RELU) begin : g_relu
    relu #(.W(W_Y)) u_relu (.din(sum), .dout(y));
  end else begin : g_lin
    assign y = sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LATENCY-2:0], in_valid};
  end
  assign out_valid = vld_sr[LATENCY-1];

  initial begin
    assert (TREE_IN > N_IN)
      else $error("neuron: TREE_IN (%0d) must exceed N_IN (%0d) to hold the bias", TREE_IN, N_IN);
  end

endmodule
