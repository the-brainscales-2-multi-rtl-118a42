// Shared constants and types of the BrainScaleS-2 multi-chip spike routing.
//
// The widths follow the routing description: the ASIC emits beats of up to
// three parallel events, each a 16-bit spike label with an 8-bit timestamp;
// the transceiver user interface carries one 16-bit word per cycle, of which
// 15 bits are left for a real-time spike label so that command messages can
// share the link. This design marks a command word by setting bit 15 and a
// spike word by clearing it; the command code of the sync request is this
// design's own choice.
package bss2_mc_pkg;

  localparam int unsigned ASIC_LABEL_W    = 16;  // BSS-2 spike label
  localparam int unsigned LINK_LABEL_W    = 15;  // label on the transceiver link
  localparam int unsigned TS_W            = 8;   // layer-2 timestamp bits
  localparam int unsigned EVENTS_PER_BEAT = 3;   // parallel events per layer-2 beat
  localparam int unsigned LINK_W          = 16;  // transceiver user data width

  typedef logic [ASIC_LABEL_W-1:0] asic_label_t;
  typedef logic [LINK_LABEL_W-1:0] link_label_t;
  typedef logic [LINK_W-1:0]       link_word_t;

  // Command payloads (15 bit) carried with bit 15 of the link word set.
  typedef enum logic [LINK_LABEL_W-1:0] {
    CMD_NOP      = 15'h0000,
    CMD_SYNC_REQ = 15'h0001
  } cmd_t;

  // One event on the layer-2 side.
  typedef struct packed {
    logic        valid;
    asic_label_t label;
    logic [TS_W-1:0] ts;
  } l2_event_t;

  // One layer-2 beat: slot 0 is events[0].
  typedef l2_event_t [EVENTS_PER_BEAT-1:0] l2_beat_t;

  // A beat with timestamps discarded, as carried across the tap FIFO.
  typedef struct packed {
    logic        valid;
    asic_label_t label;
  } ev_t;
  typedef ev_t [EVENTS_PER_BEAT-1:0] beat_t;

  function automatic link_word_t make_cmd_word(input link_label_t payload);
    return {1'b1, payload};
  endfunction

  function automatic link_word_t make_spike_word(input link_label_t label);
    return {1'b0, label};
  endfunction

endpackage
