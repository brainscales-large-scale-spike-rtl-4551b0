// bucket_manager: event aggregation with bucket renaming.
//
// Events tagged with a 16-bit network destination (Dst) and a 30-bit payload
// (Pls) arrive from the input buffer, one per clock. The destination space
// (2^16) is far larger than the number of buckets, so buckets are renamed
// like registers in an out-of-order processor: the map table says which
// bucket currently serves a destination; a destination not in the table is
// given the bucket at the head of the free list. The event is then handed to
// exactly one bucket (one-hot request). If no bucket is free, the most urgent
// assigned bucket is evicted: it gets an external flush trigger and its map
// entry is cleared, and the event waits until a bucket comes back.
// A bucket stays assigned across flushes and keeps aggregating for its
// destination. It is released (map entry cleared through its Dest register,
// number pushed to the free list) when it is idle: its last batch is sent and
// no new event arrived. Release goes first: an event that would land in the
// bucket being released waits one clock and then takes a new bucket.
// Flushed batches leave through one output. The arbiter grants the flushing
// bucket with the most urgent batch deadline, the grant is held from the
// clock the batch is first offered until its last group, and a multiplexer drives the selected bucket's groups, its Dest and
// the batch size to the output.
//
// Interface: in_valid/in_ready/in_data (tagged_event_t); now is system time,
// margin the deadline slack (Threshold = now + margin); out_valid/out_ready
// with out_first/out_last, out_dest, out_total (batch size, valid with
// out_first), out_count and out_slots. stat_* count events, allocations,
// evictions, releases and stall cycles for observation.
// From the paper: map table, free list, one-hot request, arbiter selecting
// the most urgent bucket, output multiplexer, evicting a bucket when none is
// free. This design's choices: when a bucket is released, eviction choice and
// the priority rules above.
module bucket_manager
  import bss_pkg::*;
#(
  parameter int unsigned N_BUCKETS = 16,
  parameter int unsigned MAXEV     = MAX_EVENTS,
  parameter int unsigned D_W       = DEST_W,
  localparam int unsigned IW       = $clog2(N_BUCKETS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  ts_t                           now,
  input  ts_t                           margin,
  // from IN-BUF
  input  logic                          in_valid,
  output logic                          in_ready,
  input  tagged_event_t                 in_data,
  // flushed groups
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic                          out_first,
  output logic                          out_last,
  output dest_t                         out_dest,
  output logic [CNT_W-1:0]              out_total,
  output logic [2:0]                    out_count,
  output logic [GROUP-1:0][SLOT_W-1:0]  out_slots,
  // observation
  output logic                          ready,
  output logic [31:0]                   stat_events,
  output logic [31:0]                   stat_allocs,
  output logic [31:0]                   stat_evicts,
  output logic [31:0]                   stat_releases,
  output logic [31:0]                   stat_stall_full,
  output logic [31:0]                   stat_stall_nofree,
  output logic [31:0]                   stat_flush_deadline,
  output logic [31:0]                   stat_flush_full,
  output logic [31:0]                   stat_flush_ext,
  output logic [31:0]                   stat_overlap
);
  // ---------------------------------------------------------------- buckets
  logic [N_BUCKETS-1:0]  b_alloc, b_in_valid, b_in_ready, b_ext, b_idle;
  logic [N_BUCKETS-1:0]  b_flush_req, b_last, b_pop, b_trig;
  dest_t                 b_dest      [N_BUCKETS];
  ts_t                   b_min       [N_BUCKETS];
  ts_t                   b_key       [N_BUCKETS];
  logic [CNT_W-1:0]      b_fill      [N_BUCKETS];
  logic [CNT_W-1:0]      b_total     [N_BUCKETS];
  logic [2:0]            b_count     [N_BUCKETS];
  logic [2:0]            b_cause     [N_BUCKETS];
  logic [GROUP-1:0][SLOT_W-1:0] b_slots [N_BUCKETS];
  ts_t                   threshold;

  assign threshold = now + margin;

  for (genvar i = 0; i < N_BUCKETS; i++) begin : g_bucket
    bucket #(.MAXEV(MAXEV)) u_bucket (
      .clk, .rst_n,
      .alloc        (b_alloc[i]),
      .alloc_dest   (dest_t'(in_data.dest)),
      .dest         (b_dest[i]),
      .threshold    (threshold),
      .in_valid     (b_in_valid[i]),
      .in_ready     (b_in_ready[i]),
      .in_event     (in_data.ev),
      .ext_trigger  (b_ext[i]),
      .idle         (b_idle[i]),
      .fill_cnt     (b_fill[i]),
      .min_ts       (b_min[i]),
      .trigger_flush(b_trig[i]),
      .flush_cause  (b_cause[i]),
      .flush_req    (b_flush_req[i]),
      .flush_key    (b_key[i]),
      .out_slots    (b_slots[i]),
      .out_count    (b_count[i]),
      .out_total    (b_total[i]),
      .out_last     (b_last[i]),
      .out_pop      (b_pop[i])
    );
  end

  // --------------------------------------------------- map table, free list
  logic           mt_hit, mt_set, mt_clr;
  logic [IW-1:0]  mt_hit_id, fl_head;
  logic [D_W-1:0] mt_clr_dest;
  logic           fl_nonempty, fl_pop, fl_push;
  logic [IW-1:0]  fl_push_id;
  logic [IW:0]    fl_count;

  map_table #(.D_W(D_W), .N(N_BUCKETS)) u_map (
    .clk, .rst_n, .ready,
    .lookup_dest(D_W'(in_data.dest)),
    .hit(mt_hit), .hit_id(mt_hit_id),
    .set_en(mt_set), .set_dest(D_W'(in_data.dest)), .set_id(fl_head),
    .clr_en(mt_clr), .clr_dest(mt_clr_dest)
  );

  free_list #(.N(N_BUCKETS)) u_free (
    .clk, .rst_n,
    .pop(fl_pop), .head_id(fl_head), .nonempty(fl_nonempty),
    .push(fl_push), .push_id(fl_push_id), .count(fl_count)
  );

  // bucket bookkeeping: assigned = taken from the free list,
  // mapped = reachable through the map table (cleared at eviction)
  logic [N_BUCKETS-1:0] assigned_q, mapped_q;

  // ------------------------------------------------------------- release
  logic          rel;
  logic [IW-1:0] rel_id;
  always_comb begin
    rel    = 1'b0;
    rel_id = '0;
    for (int i = N_BUCKETS-1; i >= 0; i--)
      if (assigned_q[i] && b_idle[i]) begin
        rel    = 1'b1;
        rel_id = IW'(i);
      end
  end

  // ----------------------------------------------------- eviction arbiter
  logic [N_BUCKETS-1:0] ev_req, ev_grant;
  ts_t                  ev_key [N_BUCKETS];
  logic                 evicting;   // an evicted bucket is not yet released
  always_comb begin
    for (int i = 0; i < N_BUCKETS; i++) begin
      ev_req[i] = mapped_q[i];
      // a bucket with nothing collected frees soonest: rank it first
      ev_key[i] = (b_fill[i] == '0) ? ts_t'(now - (ts_t'(1) << (TS_W-1))) : b_min[i];
    end
  end
  assign evicting = |(assigned_q & ~mapped_q);

  flush_arbiter #(.N(N_BUCKETS)) u_evict_arb (
    .req(ev_req), .key(ev_key), .now, .grant(ev_grant)
  );

  logic [IW-1:0] ev_id;
  always_comb begin
    ev_id = '0;
    for (int i = 0; i < N_BUCKETS; i++) if (ev_grant[i]) ev_id = IW'(i);
  end

  // ------------------------------------------------------ event steering
  logic          deliver, do_alloc, do_evict, stall_full, stall_nofree;
  logic [IW-1:0] tgt;
  always_comb begin
    deliver      = 1'b0;
    do_alloc     = 1'b0;
    do_evict     = 1'b0;
    stall_full   = 1'b0;
    stall_nofree = 1'b0;
    tgt          = mt_hit ? mt_hit_id : fl_head;
    if (in_valid && ready) begin
      if (mt_hit) begin
        if (rel && rel_id == mt_hit_id) begin
          // bucket is being released: retry next clock
        end else if (b_in_ready[mt_hit_id]) begin
          deliver = 1'b1;
        end else begin
          stall_full = 1'b1;
        end
      end else if (fl_nonempty) begin
        deliver  = 1'b1;
        do_alloc = 1'b1;
      end else begin
        stall_nofree = 1'b1;
        do_evict     = !evicting && !rel && |ev_grant;
      end
    end
  end

  assign in_ready = deliver;
  assign fl_pop   = do_alloc;
  assign mt_set   = do_alloc;
  assign fl_push  = rel;
  assign fl_push_id = rel_id;
  // one clear port: release and eviction never happen in the same clock
  assign mt_clr      = (rel && mapped_q[rel_id]) || do_evict;
  assign mt_clr_dest = D_W'(do_evict ? b_dest[ev_id] : b_dest[rel_id]);

  always_comb begin
    b_alloc    = '0;
    b_in_valid = '0;
    b_ext      = '0;
    if (do_alloc) b_alloc[tgt]    = 1'b1;
    if (deliver)  b_in_valid[tgt] = 1'b1;
    if (do_evict) b_ext[ev_id]    = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      assigned_q <= '0;
      mapped_q   <= '0;
    end else begin
      if (rel) begin
        assigned_q[rel_id] <= 1'b0;
        mapped_q[rel_id]   <= 1'b0;
      end
      if (do_evict) mapped_q[ev_id] <= 1'b0;
      if (do_alloc) begin
        assigned_q[tgt] <= 1'b1;
        mapped_q[tgt]   <= 1'b1;
      end
    end
  end

  // --------------------------------------------- output arbiter and MUX
  // The choice is frozen from the first clock a batch is offered until its
  // last group is taken, so the offered data never changes under a waiting
  // receiver (the framer reads the batch size and Dest before the first pop).
  logic                 lock_q, started_q;
  logic [IW-1:0]        sel_q, sel;
  logic [N_BUCKETS-1:0] out_grant;

  flush_arbiter #(.N(N_BUCKETS)) u_out_arb (
    .req(b_flush_req), .key(b_key), .now, .grant(out_grant)
  );

  always_comb begin
    sel = sel_q;
    if (!lock_q)
      for (int i = 0; i < N_BUCKETS; i++) if (out_grant[i]) sel = IW'(i);
  end

  assign out_valid = lock_q ? 1'b1 : |out_grant;
  assign out_first = !started_q;
  assign out_last  = b_last[sel];
  assign out_dest  = b_dest[sel];
  assign out_total = b_total[sel];
  assign out_count = b_count[sel];
  assign out_slots = b_slots[sel];

  always_comb begin
    b_pop = '0;
    if (out_valid && out_ready) b_pop[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_q    <= 1'b0;
      started_q <= 1'b0;
      sel_q     <= '0;
    end else if (out_valid && out_ready && out_last) begin
      lock_q    <= 1'b0;
      started_q <= 1'b0;
    end else if (out_valid) begin
      lock_q    <= 1'b1;
      sel_q     <= sel;
      if (out_ready) started_q <= 1'b1;
    end
  end

  // ------------------------------------------------------------ counters
  logic [N_BUCKETS-1:0] go_v, go_dl, go_full, go_ext;
  always_comb begin
    for (int i = 0; i < N_BUCKETS; i++) begin
      go_v[i]    = b_trig[i] && !b_flush_req[i];
      go_dl[i]   = go_v[i] && b_cause[i][0];
      go_full[i] = go_v[i] && b_cause[i][1];
      go_ext[i]  = go_v[i] && b_cause[i][2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_events <= '0; stat_allocs <= '0; stat_evicts <= '0; stat_releases <= '0;
      stat_stall_full <= '0; stat_stall_nofree <= '0;
      stat_flush_deadline <= '0; stat_flush_full <= '0; stat_flush_ext <= '0;
      stat_overlap <= '0;
    end else begin
      stat_events       <= stat_events + 32'(deliver);
      stat_allocs       <= stat_allocs + 32'(do_alloc);
      stat_evicts       <= stat_evicts + 32'(do_evict);
      stat_releases     <= stat_releases + 32'(rel);
      stat_stall_full   <= stat_stall_full + 32'(stall_full);
      stat_stall_nofree <= stat_stall_nofree + 32'(stall_nofree);
      stat_flush_deadline <= stat_flush_deadline + 32'($countones(go_dl));
      stat_flush_full   <= stat_flush_full + 32'($countones(go_full));
      stat_flush_ext    <= stat_flush_ext + 32'($countones(go_ext));
      // an event joins a bucket while that bucket is sending a batch
      stat_overlap      <= stat_overlap + 32'(deliver && b_flush_req[tgt]);
    end
  end

  a_onehot_in : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(b_in_valid));
  // every bucket is either on the free list or assigned, never both
  a_conserve  : assert property (@(posedge clk) disable iff (!rst_n)
                                 ready -> (32'(fl_count) + 32'($countones(assigned_q)) == 32'(N_BUCKETS)));
  a_lock_hold : assert property (@(posedge clk) disable iff (!rst_n)
                                 lock_q |-> b_flush_req[sel_q]);
endmodule
