// event_mem -- storage for the test events replayed through the trigger.
//
// DEPTH events of WIDTH bits: one event is the 20 eight-bit hit counts of 20
// consecutive clock cycles (hit i in bits [8i+7:8i], i = 0 the earliest).
// One write port loads the events; the read port is synchronous, rd_data
// holding the word addressed on the last clock edge where rd_en was high,
// so it maps onto block RAM. 500 x 160 bits follows the paper; the write
// port is this design's (the paper does not say how its memory was filled).
module event_mem #(
  parameter int unsigned DEPTH = 500,
  parameter int unsigned WIDTH = 160,
  localparam int unsigned W_ADDR = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [W_ADDR-1:0] wr_addr,
  input  logic [WIDTH-1:0]  wr_data,
  input  logic              rd_en,
  input  logic [W_ADDR-1:0] rd_addr,
  output logic [WIDTH-1:0]  rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr < W_ADDR'(DEPTH))
      mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      rd_data <= mem[rd_addr];
  end

endmodule
