// dsp_mult -- signed multiplier with three pipeline stages, written the way
// a DSP48 slice is used: operand registers, product register, output register.
//
// p = a * b appears exactly 3 clock edges after a and b are sampled; a new
// product can start every clock. The latency of 3 and the mapping of every
// multiplier onto a DSP slice follow the paper; which registers make up the
// three stages is this design's choice. The datapath has no reset: nothing
// downstream reads it before the valid bit that travels beside it says so.
module dsp_mult #(
  parameter int unsigned W_A = 8,
  parameter int unsigned W_B = 12
) (
  input  logic                        clk,
  input  logic signed [W_A-1:0]       a,
  input  logic signed [W_B-1:0]       b,
  output logic signed [W_A+W_B-1:0]   p
);

  logic signed [W_A-1:0]     a_q;
  logic signed [W_B-1:0]     b_q;
  logic signed [W_A+W_B-1:0] m_q;

  always_ff @(posedge clk) begin
    a_q <= a;           // stage 1: operand registers
    b_q <= b;
    m_q <= a_q * b_q;   // stage 2: product register
    p   <= m_q;         // stage 3: output register
  end

endmodule
