// event_ctrl -- replays the stored events once per enable.
//
// Idle until enable is seen high. On that clock edge it reads address 0 and
// then one address per clock, N_EVENTS reads back to back, so the trigger
// makes N_EVENTS decisions in a row. After the last read it waits for enable
// to fall before it can start again; enable falling during a run stops it.
// rd_addr/rd_en go straight to a synchronous-read memory, and data_valid is
// rd_en delayed one clock, so it marks the cycles when the memory output
// holds an event. 500 decisions per enable follow the paper; the arm/rearm
// protocol is this design's.
module event_ctrl #(
  parameter int unsigned N_EVENTS = 500,
  localparam int unsigned W_ADDR = $clog2(N_EVENTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  output logic              rd_en,
  output logic [W_ADDR-1:0] rd_addr,
  output logic              data_valid,
  output logic              busy
);

  typedef enum logic [1:0] {
    S_IDLE,   // armed, waiting for enable
    S_RUN,    // issuing reads
    S_DONE    // run finished, waiting for enable low
  } state_e;

  state_e            state;
  logic [W_ADDR-1:0] cnt;

  // Read while armed and enable is high, or during a run.
  assign rd_en   = enable && (state == S_IDLE || state == S_RUN);
  assign rd_addr = cnt;
  assign busy    = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      data_valid <= 1'b0;
    end else begin
      data_valid <= rd_en;
      if (!enable) begin
        state <= S_IDLE;
        cnt   <= '0;
      end else if (rd_en) begin
        if (cnt == W_ADDR'(N_EVENTS - 1)) begin
          state <= S_DONE;
          cnt   <= '0;
        end else begin
          state <= S_RUN;
          cnt   <= cnt + 1'b1;
        end
      end
    end
  end

  // A run never addresses past the last event.
  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> rd_addr < W_ADDR'(N_EVENTS));

endmodule
