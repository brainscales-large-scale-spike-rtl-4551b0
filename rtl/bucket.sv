// bucket: event-accumulation buffer for one network destination.
//
// Incoming 30-bit events are collected by a deserialiser (DESER) into groups
// of four and written, one group per clock, into a FIFO of 128-bit words.
// Beside the FIFO sit three registers: Dest (the destination this bucket
// serves, also used to clear its map-table entry), Threshold (reloaded every
// clock with system time plus the deadline margin) and the minimum timestamp
// of the events collected so far (updated through a wrap-around minimum,
// f_min). A flush is triggered when
//   * the minimum timestamp is at or before the Threshold (f_comp), or
//   * the bucket holds MAX_EVENTS events (124 = one full 496-byte payload), or
//   * ext_trigger was pulsed by the bucket management.
// Flushing and aggregation overlap. Two counters hold the fill level: fill
// counts events of the batch being collected, drain counts events of the
// flushed batch still to be sent. At a flush the counters swap: drain takes
// the fill value and fill restarts at zero, while new events keep arriving.
// A partly filled DESER group is written to the FIFO at the flush so that the
// batch ends on a group boundary. A new flush waits until drain is zero; the
// bucket stops accepting only when fill has reached MAX_EVENTS.
//
// Interface: in_valid/in_ready/in_event take one event per clock. While
// flush_req is high the head group is on out_slots with out_count (1..4)
// valid slots, out_total is the number of events left in the batch (the batch
// size at its first group) and out_last marks its final group; out_pop removes
// the head group. alloc loads Dest with alloc_dest (bucket must be idle).
// Timing: an event accepted in clock t is counted in fill at t+1; a trigger
// seen in clock t swaps the counters at the end of t, so the first group is
// available at t+1.
// From the paper: the DESER/FIFO structure, Dest, Threshold and minimum
// timestamp registers, the three flush conditions joined by OR, and the two
// swapped counters. This design's choices: the modular comparisons, the FIFO
// depth (two full batches) and the handling of partial groups.
module bucket
  import bss_pkg::*;
#(
  parameter int unsigned MAXEV       = MAX_EVENTS,
  parameter int unsigned FIFO_GROUPS = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // assignment
  input  logic                         alloc,
  input  dest_t                        alloc_dest,
  output dest_t                        dest,
  input  ts_t                          threshold,
  // event input
  input  logic                         in_valid,
  output logic                         in_ready,
  input  net_event_t                   in_event,
  input  logic                         ext_trigger,
  // state seen by the bucket management
  output logic                         idle,
  output logic [CNT_W-1:0]             fill_cnt,
  output ts_t                          min_ts,
  output logic                         trigger_flush,
  output logic [2:0]                   flush_cause,   // {ext, full, deadline}
  // flushed batch output
  output logic                         flush_req,
  output ts_t                          flush_key,
  output logic [GROUP-1:0][SLOT_W-1:0] out_slots,
  output logic [2:0]                   out_count,
  output logic [CNT_W-1:0]             out_total,
  output logic                         out_last,
  input  logic                         out_pop
);
  localparam int unsigned PW = $clog2(FIFO_GROUPS);

  // registers
  dest_t                         dest_q;
  ts_t                           thr_q;
  ts_t                           min_q;
  logic [CNT_W-1:0]              fill_q, drain_q;
  logic [GROUP-2:0][SLOT_W-1:0]  deser_q;
  logic [1:0]                    dcnt_q;
  logic                          ext_q;
  logic [WORD_W-1:0]             fifo [FIFO_GROUPS];
  logic [PW-1:0]                 wr_ptr, rd_ptr;

  // combinational next state
  logic                          acc, full, deadline, go;
  logic [2:0]                    dcnt_n;
  logic [GROUP-1:0][SLOT_W-1:0]  group_n;
  logic                          push;
  ts_t                           min_n;
  logic [CNT_W-1:0]              fill_n;

  assign dest      = dest_q;
  assign fill_cnt  = fill_q;
  assign min_ts    = min_q;
  assign in_ready  = fill_q < CNT_W'(MAXEV);
  assign acc       = in_valid && in_ready;
  assign full      = fill_q == CNT_W'(MAXEV);
  assign deadline  = fill_q != '0 && ts_before_eq(min_q, thr_q);
  assign trigger_flush = fill_q != '0 && (full || deadline || ext_q);
  assign go        = trigger_flush && drain_q == '0;
  assign flush_cause = {ext_q, full, deadline};
  assign idle      = fill_q == '0 && drain_q == '0;

  // f_min: wrap-around minimum of the stored minimum and the new timestamp
  assign min_n = (fill_q == '0 || ts_before_eq(in_event.ts, min_q)) ? in_event.ts : min_q;
  assign fill_n = fill_q + CNT_W'(acc);

  // DESER: place the new event behind the ones already collected
  always_comb begin
    group_n = '0;
    for (int i = 0; i < GROUP-1; i++)
      if (i < int'(dcnt_q)) group_n[i] = deser_q[i];
    if (acc) group_n[dcnt_q] = ev_to_slot(in_event);
    dcnt_n = {1'b0, dcnt_q} + 3'(acc);
    push   = dcnt_n == 3'(GROUP) || (go && dcnt_n != '0);
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= group_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dest_q    <= '0;
      thr_q     <= '0;
      min_q     <= '0;
      fill_q    <= '0;
      drain_q   <= '0;
      deser_q   <= '0;
      dcnt_q    <= '0;
      ext_q     <= 1'b0;
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      flush_key <= '0;
    end else begin
      thr_q <= threshold;
      if (alloc) dest_q <= alloc_dest;
      if (push) wr_ptr <= wr_ptr + 1'b1;
      deser_q <= group_n[GROUP-2:0];
      dcnt_q  <= push ? 2'd0 : dcnt_n[1:0];
      // external trigger is held until it causes a flush; it is dropped when
      // there is nothing to flush
      if (go || (fill_q == '0 && !acc)) ext_q <= ext_trigger;
      else if (ext_trigger)             ext_q <= 1'b1;
      if (go) begin
        // counter swap: the fill level becomes the drain level
        drain_q   <= fill_n;
        fill_q    <= '0;
        flush_key <= acc ? min_n : min_q;
      end else begin
        fill_q <= fill_n;
        if (acc) min_q <= min_n;
        if (out_pop) begin
          drain_q <= (drain_q > CNT_W'(GROUP)) ? drain_q - CNT_W'(GROUP) : '0;
        end
      end
      if (out_pop) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  assign flush_req = drain_q != '0;
  assign out_slots = fifo[rd_ptr];
  assign out_count = (drain_q >= CNT_W'(GROUP)) ? 3'(GROUP) : 3'(drain_q);
  assign out_total = drain_q;
  assign out_last  = drain_q <= CNT_W'(GROUP);

  a_pop_only_when_flushing: assert property (@(posedge clk) disable iff (!rst_n)
                                             out_pop |-> flush_req);
  a_alloc_only_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                      alloc |-> idle);
endmodule
