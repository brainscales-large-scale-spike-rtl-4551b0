// extoll_tx_framer: turns flushed batches into outgoing network messages.
// Each message is one header word followed by the batch's payload words:
//   header  = msg_header_t {reserved, count, dest}, count = events in batch;
//   payload = up to 31 words, each four 32-bit event slots (slot 0 in bits
//             31:0), the last word padded with zero slots.
// tx_sop marks the header, tx_eop the last payload word. The header costs one
// clock, so a message with a single event takes two clocks and a full
// 124-event message 32 clocks. The framer is a two-state machine (header,
// payload); it holds in_ready low while it sends the header.
// The per-message header overhead and the 496-byte payload limit follow the
// paper; the header layout is this design's own, as the network's real header
// format is not part of this description.
module extoll_tx_framer
  import bss_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic                         in_first,
  input  logic                         in_last,
  input  dest_t                        in_dest,
  input  logic [CNT_W-1:0]             in_total,
  input  logic [2:0]                   in_count,
  input  logic [GROUP-1:0][SLOT_W-1:0] in_slots,
  output logic                         tx_valid,
  input  logic                         tx_ready,
  output logic                         tx_sop,
  output logic                         tx_eop,
  output logic [WORD_W-1:0]            tx_data,
  output logic [31:0]                  stat_messages
);
  typedef enum logic {S_HEADER, S_PAYLOAD} state_t;
  state_t state_q;

  logic [GROUP-1:0][SLOT_W-1:0] payload;
  always_comb begin
    for (int i = 0; i < GROUP; i++)
      payload[i] = (i < int'(in_count)) ? in_slots[i] : '0;
  end

  always_comb begin
    tx_valid = in_valid;
    tx_sop   = 1'b0;
    tx_eop   = 1'b0;
    in_ready = 1'b0;
    tx_data  = payload;
    if (state_q == S_HEADER) begin
      tx_sop  = 1'b1;
      tx_data = msg_header_t'{reserved: '0, count: in_total, dest: in_dest};
    end else begin
      tx_eop   = in_last;
      in_ready = tx_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_HEADER;
      stat_messages <= '0;
    end else if (tx_valid && tx_ready) begin
      if (state_q == S_HEADER) begin
        state_q       <= S_PAYLOAD;
        stat_messages <= stat_messages + 1;
      end else if (in_last) begin
        state_q <= S_HEADER;
      end
    end
  end

  a_header_on_first: assert property (@(posedge clk) disable iff (!rst_n)
                                      (state_q == S_HEADER && in_valid) |-> in_first);
endmodule
