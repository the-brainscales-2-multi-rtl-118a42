// System synchronisation barrier of a Node-FPGA (system clock domain).
//
// Shortly before the real-time section of an experiment the playback executes
// a barrier command (barrier_valid, held until barrier_done). The barrier
// toggles req_toggle once, which the transceiver domain turns into a sync
// request to the Aggregator, and then waits. The Aggregator answers every
// node at once by toggling the shared external sync signal; the barrier sees
// the toggle after a two-flop synchroniser and pulses barrier_done for one
// cycle, letting playback continue. Since the signal reaches all nodes
// symmetrically, their real-time sections start within one system clock
// cycle. Either edge of the sync signal counts as a toggle; a toggle that
// arrives with no barrier pending is ignored. Those details are this
// design's choice.
module sync_barrier (
  input  logic clk,
  input  logic rst_n,
  input  logic barrier_valid,
  output logic barrier_done,
  output logic req_toggle,
  input  logic sync_signal      // asynchronous
);
  typedef enum logic [0:0] {S_IDLE, S_WAIT} state_t;
  state_t state;
  logic [2:0] sync_q;
  logic       toggled;

  assign toggled = sync_q[2] ^ sync_q[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      sync_q       <= '0;
      req_toggle   <= 1'b0;
      barrier_done <= 1'b0;
    end else begin
      sync_q       <= {sync_q[1:0], sync_signal};
      barrier_done <= 1'b0;
      case (state)
        S_IDLE: if (barrier_valid && !barrier_done) begin
          req_toggle <= ~req_toggle;
          state      <= S_WAIT;
        end
        S_WAIT: if (toggled) begin
          barrier_done <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
