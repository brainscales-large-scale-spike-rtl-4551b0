// rx_distributor: receiving path. Messages arriving from the network (one
// header word, then payload words of four 32-bit event slots, as produced by
// extoll_tx_framer) are unpacked into single events. The GUID of each event
// indexes the destination lookup table, which returns a multicast mask over
// the HICANN links; the event is offered on every link whose mask bit is set
// and is retired when all of them have taken it (an all-zero mask drops it).
// Pipeline: one event per clock is looked up (the table answers one clock
// later) while the previous event is being delivered, so the throughput is one
// event per clock when the links keep up. A message's header is taken in one
// clock; its count field says how many slots of the payload are events.
// The GUID lookup and multicast mask follow the paper; the message layout,
// the handshakes and the event format handed to the links ({GUID, timestamp})
// are this design's choices.
module rx_distributor
  import bss_pkg::*;
#(
  parameter int unsigned N_LINKS = N_HICANN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // received messages
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  logic                 rx_sop,
  input  logic                 rx_eop,
  input  logic [WORD_W-1:0]    rx_data,
  // destination table configuration
  input  logic                 cfg_we,
  input  guid_t                cfg_guid,
  input  logic [N_LINKS-1:0]   cfg_mask,
  // to the HICANN links
  output logic [N_LINKS-1:0]   hic_valid,
  input  logic [N_LINKS-1:0]   hic_ready,
  output net_event_t           hic_event,
  output logic [31:0]          stat_events,
  output logic [31:0]          stat_multicast
);
  typedef enum logic {S_HEADER, S_PAYLOAD} state_t;
  state_t                       state_q;
  logic [CNT_W-1:0]             remain_q;
  logic [GROUP-1:0][SLOT_W-1:0] word_q;
  logic                         word_valid_q;
  logic [1:0]                   slot_q;

  logic                         b_valid_q;
  net_event_t                   b_ev_q;
  logic [N_LINKS-1:0]           b_done_q, mask, pend;
  logic                         b_free, issue, word_done;
  net_event_t                   a_ev;

  msg_header_t hdr;
  assign hdr = msg_header_t'(rx_data);

  // stage B: delivery of the looked-up event
  assign pend      = b_valid_q ? (mask & ~b_done_q) : '0;
  assign hic_valid = pend;
  assign hic_event = b_ev_q;
  assign b_free    = !b_valid_q || ((pend & ~hic_ready) == '0);

  // stage A: take the next slot of the held word
  assign a_ev  = slot_to_ev(word_q[slot_q]);
  assign issue = word_valid_q && b_free;

  // a new payload word may replace the held one in the clock its last slot
  // is issued, unless that slot ends the message
  assign word_done = issue && (slot_q == 2'(GROUP-1)) && remain_q != CNT_W'(1);
  assign rx_ready  = (state_q == S_HEADER) || !word_valid_q || word_done;

  dest_lut #(.N_LINKS(N_LINKS)) u_lut (
    .clk,
    .cfg_we, .cfg_guid, .cfg_mask,
    .rd_en  (issue),
    .rd_guid(a_ev.guid),
    .rd_mask(mask)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_HEADER;
      remain_q       <= '0;
      word_q         <= '0;
      word_valid_q   <= 1'b0;
      slot_q         <= '0;
      b_valid_q      <= 1'b0;
      b_ev_q         <= '0;
      b_done_q       <= '0;
      stat_events    <= '0;
      stat_multicast <= '0;
    end else begin
      // unpacking
      if (issue) begin
        b_valid_q <= 1'b1;
        b_ev_q    <= a_ev;
        b_done_q  <= '0;
        slot_q    <= slot_q + 1'b1;
        remain_q  <= remain_q - 1'b1;
        if (remain_q == CNT_W'(1) || slot_q == 2'(GROUP-1)) word_valid_q <= 1'b0;
        if (remain_q == CNT_W'(1)) state_q <= S_HEADER;
      end else if (b_free) begin
        b_valid_q <= 1'b0;
      end else begin
        b_done_q <= b_done_q | (pend & hic_ready);
      end
      // message input
      if (rx_valid && rx_ready) begin
        if (state_q == S_HEADER) begin
          if (rx_sop && hdr.count != '0) begin
            remain_q <= hdr.count;
            state_q  <= S_PAYLOAD;
          end
        end else begin
          word_q       <= rx_data;
          word_valid_q <= 1'b1;
          slot_q       <= '0;
        end
      end
      // statistics: an event is counted when it is retired
      if (b_valid_q && b_free) begin
        stat_events <= stat_events + 1;
        if ($countones(mask) > 1) stat_multicast <= stat_multicast + 1;
      end
    end
  end

  a_eop_matches_count: assert property (@(posedge clk) disable iff (!rst_n)
      (rx_valid && rx_ready && state_q == S_PAYLOAD && rx_eop) |-> (remain_q - CNT_W'(issue)) <= CNT_W'(GROUP));
endmodule
