// tb_bucket_manager: end-to-end test of event aggregation at the default
// size (16 buckets, 2^16 destinations). Every event carries a unique GUID so
// the checker can find it again. Checked for every flushed batch: one
// destination per batch and it is the event's own, no event lost or
// duplicated, per-destination order kept, batch size field right, at most
// 124 events. Phases:
//   1. 40 destinations (more than the buckets) with near deadlines and
//      output back-pressure: deadline flushes, evictions, stalls for a free
//      bucket, releases;
//   2. one destination at one event per clock with distant deadlines: full
//      flushes, aggregation during draining, sustained rate;
//   3. heavy back-pressure on one destination: the bucket fills while its
//      previous batch still waits (stall on a full bucket).
module tb_bucket_manager;
  import bss_pkg::*;
  logic clk = 0, rst_n = 0;
  ts_t now = 0, margin = 20;
  logic in_valid, in_ready, out_valid, out_ready, out_first, out_last, ready;
  tagged_event_t in_data;
  dest_t out_dest;
  logic [CNT_W-1:0] out_total;
  logic [2:0] out_count;
  logic [GROUP-1:0][SLOT_W-1:0] out_slots;
  logic [31:0] stat_events, stat_allocs, stat_evicts, stat_releases, stat_stall_full,
               stat_stall_nofree, stat_flush_deadline, stat_flush_full, stat_flush_ext, stat_overlap;
  int checks = 0, failures = 0;

  bucket_manager dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1'b1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sent events, by GUID
  dest_t sent_dest [int];
  int    last_out_seq [int];      // per destination: last GUID seen
  int    n_sent = 0, n_out = 0;
  int    out_mode = 0;            // 0: random ready, 1: always, 2: rarely

  initial out_ready = 0;
  always @(posedge clk)
    out_ready <= (out_mode == 1) ? 1'b1 : (out_mode == 0) ? ($urandom % 4 != 0) : ($urandom % 12 == 0);

  // output checker
  dest_t cur_dest;
  int    cur_left = 0, cur_size = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_first) begin
      chk(cur_left == 0, "new batch only after the previous one");
      cur_dest = out_dest; cur_left = int'(out_total); cur_size = int'(out_total);
      chk(cur_size >= 1 && cur_size <= MAX_EVENTS, "batch size in range");
    end
    chk(out_dest == cur_dest, "dest constant in batch");
    chk(int'(out_count) == ((cur_left >= 4) ? 4 : cur_left), "group count");
    for (int k = 0; k < int'(out_count); k++) begin
      net_event_t e;
      int g;
      e = slot_to_ev(out_slots[k]);
      g = int'(e.guid);
      if (!sent_dest.exists(g)) chk(0, $sformatf("unknown or duplicate event %0d", g));
      else begin
        chk(sent_dest[g] == cur_dest, "event in its destination's batch");
        if (last_out_seq.exists(int'(cur_dest)))
          chk(g > last_out_seq[int'(cur_dest)], "order per destination");
        last_out_seq[int'(cur_dest)] = g;
        sent_dest.delete(g);
        n_out++;
      end
    end
    cur_left -= int'(out_count);
    chk(out_last == (cur_left == 0), "last flag");
  end

  dest_t dests [40];

  task automatic send(input dest_t d, input int ts_ahead);
    in_valid = 1;
    in_data  = '{dest: d, ev: '{guid: guid_t'(n_sent), ts: ts_t'(now + ts_t'(ts_ahead))}};
    #1;
    while (!in_ready) begin @(posedge clk); #1; end
    sent_dest[n_sent] = d;
    n_sent++;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic wait_empty();
    int guard = 0;
    while (sent_dest.size() != 0 && guard < 20000) begin @(posedge clk); #1; guard++; end
    chk(sent_dest.size() == 0, $sformatf("all events delivered (%0d left)", sent_dest.size()));
  endtask

  initial begin
    int t0, n0;
    in_valid = 0; in_data = '0;
    for (int i = 0; i < 40; i++) dests[i] = dest_t'(i * 1601 + 3);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (!ready) begin @(posedge clk); #1; end

    // phase 1
    out_mode = 0;
    for (int i = 0; i < 6000; i++) begin
      if ($urandom % 4 == 0) begin @(posedge clk); #1; end
      send(dests[$urandom % 40], 30 + int'($urandom % 200));
    end
    wait_empty();
    chk(stat_evicts > 0, $sformatf("evictions: %0d", stat_evicts));
    chk(stat_stall_nofree > 0, "stall waiting for a free bucket");
    chk(stat_flush_deadline > 0, "deadline flushes");
    chk(stat_flush_ext > 0, "external (eviction) flushes");
    chk(stat_releases > 0, "bucket releases");

    // phase 2: one destination, rate
    out_mode = 1;
    repeat (5) @(posedge clk); #1;
    n0 = n_sent; t0 = $time;
    for (int i = 0; i < 2000; i++) send(16'h0abc, 8000);
    chk(($time - t0) / 10 <= 2000 + 2000 / 100, $sformatf("2000 events in %0d clocks", ($time - t0) / 10));
    wait_empty();
    chk(stat_flush_full >= 16, $sformatf("full flushes: %0d", stat_flush_full));
    chk(stat_overlap > 0, "events aggregated during a drain");

    // phase 3: back-pressure
    out_mode = 2;
    for (int i = 0; i < 800; i++) send(16'h0abd, 8000);
    out_mode = 1;
    wait_empty();
    chk(stat_stall_full > 0, "stall on a full bucket");
    chk(32'(n_sent) == stat_events && n_out == n_sent, "event count");
    $display("flushes: deadline %0d full %0d ext %0d; evictions %0d; stalls nofree %0d full %0d; overlap %0d",
             stat_flush_deadline, stat_flush_full, stat_flush_ext, stat_evicts,
             stat_stall_nofree, stat_stall_full, stat_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
