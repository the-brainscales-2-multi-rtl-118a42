// System sync request generator (Node-FPGA, transceiver clock domain).
//
// When the playback executes a synchronisation barrier, the system clock
// domain toggles req_toggle once. That level crosses into the transceiver
// clock through a three-flop synchroniser; each change seen at its end marks
// one request, which is offered to the link multiplexer as the 15-bit command
// payload CMD_SYNC_REQ until cmd_ready takes it. A toggle rather than a pulse
// is used so that the request survives the crossing from the slower clock.
// Timing: the command is offered four transceiver clock edges after the
// toggle. The toggle handshake and command code are this design's choice.
module sync_request_gen
  import bss2_mc_pkg::*;
(
  input  logic        mgt_clk,
  input  logic        mgt_rst_n,
  input  logic        req_toggle,   // system clock domain
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output link_label_t cmd_data
);
  logic [2:0] sync_q;
  logic       seen_q;

  always_ff @(posedge mgt_clk or negedge mgt_rst_n) begin
    if (!mgt_rst_n) begin
      sync_q    <= '0;
      seen_q    <= 1'b0;
      cmd_valid <= 1'b0;
    end else begin
      sync_q <= {sync_q[1:0], req_toggle};
      seen_q <= sync_q[2];
      if (sync_q[2] != seen_q)    cmd_valid <= 1'b1;
      else if (cmd_ready)         cmd_valid <= 1'b0;
    end
  end

  assign cmd_data = CMD_SYNC_REQ;

endmodule
