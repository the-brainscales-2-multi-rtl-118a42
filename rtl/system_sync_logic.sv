// System synchronisation logic of the Aggregator (global clock domain).
//
// Every participating Node-FPGA sends one sync-request command when its
// playback reaches a barrier; req[i] pulses when link i's command arrives.
// Requests from nodes whose participate bit is set are collected. When all
// participants have asked, the shared sync signal is toggled, releasing all
// barriers at once. Two configurable periods guard against faults:
//  - timeout: if the set is not complete timeout_cycles after its first
//    request, the collected requests are discarded (timeout_pulse) so a node
//    that failed cannot hold the others forever; 0 disables the timeout;
//  - refractory: for refractory_cycles after a toggle new requests are
//    ignored, so stale or repeated requests cannot trigger a second toggle.
// The presence of both periods follows the paper; how exactly they act is
// this design's reading. Timing: the toggle follows the completing request
// by one cycle.
module system_sync_logic #(
  parameter int unsigned N     = 12,
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     req,
  input  logic [N-1:0]     participate,
  input  logic [CNT_W-1:0] timeout_cycles,
  input  logic [CNT_W-1:0] refractory_cycles,
  output logic             sync_signal,
  output logic             timeout_pulse,
  output logic [N-1:0]     pending
);
  typedef enum logic [1:0] {S_IDLE, S_COLLECT, S_REFRACTORY} state_t;
  state_t          state;
  logic [CNT_W-1:0] cnt;
  logic [N-1:0]     pend_next;

  assign pend_next = pending | (req & participate);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cnt           <= '0;
      pending       <= '0;
      sync_signal   <= 1'b0;
      timeout_pulse <= 1'b0;
    end else begin
      timeout_pulse <= 1'b0;
      case (state)
        S_IDLE: begin
          cnt <= '0;
          if ((req & participate) != '0) begin
            if ((pend_next & participate) == participate) begin
              sync_signal <= ~sync_signal;
              pending     <= '0;
              state       <= S_REFRACTORY;
            end else begin
              pending <= pend_next;
              state   <= S_COLLECT;
            end
          end
        end
        S_COLLECT: begin
          cnt <= cnt + CNT_W'(1);
          if ((pend_next & participate) == participate) begin
            sync_signal <= ~sync_signal;
            pending     <= '0;
            cnt         <= '0;
            state       <= S_REFRACTORY;
          end else if (timeout_cycles != '0 && cnt + CNT_W'(1) >= timeout_cycles) begin
            pending       <= '0;
            timeout_pulse <= 1'b1;
            state         <= S_IDLE;
          end else begin
            pending <= pend_next;
          end
        end
        S_REFRACTORY: begin
          cnt <= cnt + CNT_W'(1);
          if (cnt + CNT_W'(1) >= refractory_cycles) begin
            cnt   <= '0;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
