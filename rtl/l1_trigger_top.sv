// l1_trigger_top -- level-1 trigger decision by a 20x20x2 multi-layer
// perceptron, as it is run on the trigger FPGA.
//
// Input: for each candidate event, the number of fired PMTs in each of 20
// consecutive clock cycles. Output: one L1 accept bit per event, one event
// per clock, each decision 16 clock cycles after its hits are complete.
//
// Two sources feed the network (mlp_core):
//  * stored events (live_mode = 0): event_mem holds N_EVENTS events, loaded
//    through the wr_* port. When enable goes high, event_ctrl reads them
//    back to back, one per clock, so N_EVENTS decisions come out in a row.
//    The first decision appears on the 16th clock edge after the edge that
//    first sees enable high. This is how the trigger's rate and latency are
//    measured on the bench.
//  * live stream (live_mode = 1): hit_window gathers nhit, one count per
//    nhit_valid, into a sliding 20-sample window and feeds every new window
//    to the network, again with 16 cycles from the last sample to the
//    decision. This source and its mux are this design's own addition.
// live_mode should only change while no decision is in flight.
//
// l1_valid marks the clocks that carry a decision on l1_accept (accept is 0
// otherwise). hidden_probe and output_probe bring out the 22 neuron values
// for in-system debugging. Weights and biases are the PARAMS constant
// (layout in mlp_pkg); its default is a stand-in, not trained weights.
module l1_trigger_top
  import mlp_pkg::*;
#(
  parameter params_t     PARAMS   = DEFAULT_PARAMS,
  parameter int unsigned N_EVENTS = DEFAULT_N_EVENTS,
  localparam int unsigned W_ADDR  = $clog2(N_EVENTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              live_mode,
  input  logic              nhit_valid,
  input  hit_t              nhit,
  input  logic              wr_en,
  input  logic [W_ADDR-1:0] wr_addr,
  input  logic [W_EVENT-1:0] wr_data,
  output logic              l1_accept,
  output logic              l1_valid,
  output logic              run_busy,
  output hid_t              hidden_probe [N_HIDDEN],
  output out_t              output_probe [N_OUTPUT]
);

  logic              rd_en;
  logic [W_ADDR-1:0] rd_addr;
  logic [W_EVENT-1:0] rd_data;
  logic              mem_valid;
  hit_t              mem_hits [N_INPUT];
  hit_t              win_hits [N_INPUT];
  logic              win_valid;
  hit_t              mlp_hits [N_INPUT];
  logic              mlp_valid;

  event_ctrl #(.N_EVENTS(N_EVENTS)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .enable     (enable && !live_mode),
    .rd_en      (rd_en),
    .rd_addr    (rd_addr),
    .data_valid (mem_valid),
    .busy       (run_busy)
  );

  event_mem #(.DEPTH(N_EVENTS), .WIDTH(W_EVENT)) u_mem (
    .clk     (clk),
    .wr_en   (wr_en),
    .wr_addr (wr_addr),
    .wr_data (wr_data),
    .rd_en   (rd_en),
    .rd_addr (rd_addr),
    .rd_data (rd_data)
  );

  hit_window #(.N_TAPS(N_INPUT), .W_HIT(W_HIT)) u_window (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (nhit_valid && live_mode),
    .nhit         (nhit),
    .window       (win_hits),
    .window_valid (win_valid)
  );

  always_comb begin
    for (int unsigned i = 0; i < N_INPUT; i++)
      mem_hits[i] = hit_t'(rd_data[W_HIT*i +: W_HIT]);
  end

  assign mlp_hits  = live_mode ? win_hits : mem_hits;
  assign mlp_valid = live_mode ? win_valid : mem_valid;

  mlp_core #(.PARAMS(PARAMS)) u_mlp (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (mlp_valid),
    .hits         (mlp_hits),
    .out_valid    (l1_valid),
    .accept       (l1_accept),
    .hidden_probe (hidden_probe),
    .output_probe (output_probe)
  );

endmodule
