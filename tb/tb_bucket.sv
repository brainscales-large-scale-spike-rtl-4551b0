// tb_bucket: directed test of one accumulation bucket at its full size
// (124 events). Covered: Dest register load; filling at one event per clock
// until full, the full flush and its 31 groups in order; aggregation of new
// events while the previous batch drains (counter swap); the deadline flush
// with a wrap-around minimum timestamp and a partial last group; the external
// trigger; an external trigger on an empty bucket doing nothing. A final
// random phase (random input, pops, thresholds and triggers) compares every
// group with a reference queue: events leave in arrival order, each group
// holds min(4, events left in its batch), out_last ends each batch and
// fill_cnt never exceeds 124.
module tb_bucket;
  import bss_pkg::*;
  logic clk = 0, rst_n = 0;
  logic alloc, in_valid, in_ready, ext_trigger, idle, trigger_flush, flush_req, out_last, out_pop;
  dest_t alloc_dest, dest;
  ts_t threshold, min_ts, flush_key;
  net_event_t in_event;
  logic [CNT_W-1:0] fill_cnt, out_total;
  logic [2:0] flush_cause, out_count;
  logic [GROUP-1:0][SLOT_W-1:0] out_slots;
  int checks = 0, failures = 0;
  net_event_t sent [$];

  bucket dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model for the random phase, sampled mid-clock
  bit rnd_on = 0;
  net_event_t ref_q [$];
  int batch_rem = 0, rnd_groups = 0, rnd_batches = 0;
  always @(negedge clk) if (rnd_on) begin
    if (in_valid && in_ready) ref_q.push_back(in_event);
    if (fill_cnt > CNT_W'(MAX_EVENTS)) chk(0, "fill_cnt above 124");
    if (flush_req && out_pop) begin
      int c;
      if (batch_rem == 0) begin
        batch_rem = int'(out_total);
        rnd_batches++;
        chk(batch_rem > 0 && batch_rem <= MAX_EVENTS, "random: batch size in range");
      end
      c = batch_rem >= 4 ? 4 : batch_rem;
      chk(out_count == 3'(c), $sformatf("random: group count %0d exp %0d", out_count, c));
      for (int k = 0; k < c; k++) begin
        net_event_t e;
        e = ref_q.size() > 0 ? ref_q.pop_front() : '0;
        chk(slot_to_ev(out_slots[k]) == e, "random: event order");
      end
      batch_rem -= c;
      chk(out_last == (batch_rem == 0), "random: out_last");
      rnd_groups++;
    end
  end

  function automatic net_event_t mk(int i, int ts);
    return '{guid: guid_t'(i * 7 + 3), ts: ts_t'(ts)};
  endfunction

  // offer one event; returns after the clock in which it was taken
  task automatic push(net_event_t e);
    in_valid = 1; in_event = e;
    #1;
    while (!in_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
    sent.push_back(e);
  endtask

  // drain one whole batch and compare with the expected events
  task automatic drain(input int n, input string tag);
    int got = 0, groups = 0;
    while (!flush_req) begin @(posedge clk); #1; end
    chk(out_total == CNT_W'(n), $sformatf("%s: batch size %0d exp %0d", tag, out_total, n));
    while (got < n) begin
      int c;
      c = (n - got >= 4) ? 4 : n - got;
      chk(out_count == 3'(c), $sformatf("%s: group count %0d exp %0d", tag, out_count, c));
      chk(out_last == (got + c == n), $sformatf("%s: out_last", tag));
      for (int k = 0; k < c; k++) begin
        net_event_t e;
        e = sent.pop_front();
        chk(slot_to_ev(out_slots[k]) == e, $sformatf("%s: event %0d", tag, got + k));
      end
      out_pop = 1;
      @(posedge clk); #1;
      out_pop = 0;
      got += c; groups++;
    end
    chk(groups == (n + 3) / 4, $sformatf("%s: groups", tag));
  endtask

  initial begin
    int t0;
    alloc = 0; in_valid = 0; ext_trigger = 0; out_pop = 0; alloc_dest = 0;
    threshold = 0; in_event = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(idle && !flush_req, "idle after reset");
    alloc = 1; alloc_dest = 16'hbeef;
    @(posedge clk); #1 alloc = 0;
    chk(dest == 16'hbeef, "Dest register");

    // --- A: fill to 124 at one event per clock, full flush
    t0 = $time;
    for (int i = 0; i < MAX_EVENTS; i++) begin
      in_valid = 1; in_event = mk(i, 10000 + i);
      #1 chk(in_ready, "ready while filling");
      @(posedge clk); #1;
      sent.push_back(in_event);
    end
    in_valid = 0;
    chk(($time - t0) / 10 == MAX_EVENTS, "124 events in 124 clocks");
    chk(!in_ready && trigger_flush && flush_cause[1], "full: input closed, full trigger");
    @(posedge clk); #1;
    chk(flush_req && out_total == CNT_W'(MAX_EVENTS), "full flush started");
    chk(fill_cnt == '0 && in_ready, "counters swapped, accepting again");
    chk(flush_key == ts_t'(10000), "batch key is minimum timestamp");

    // --- B: aggregate while draining (no deadline due yet)
    threshold = ts_t'(32700);
    fork
      drain(MAX_EVENTS, "full");
      begin
        for (int i = 0; i < 10; i++) begin
          // these go behind the batch being drained
          in_valid = 1; in_event = mk(200 + i, (i == 6) ? 32760 : 20 + i);
          @(posedge clk); #1;
        end
        in_valid = 0;
      end
    join
    chk(fill_cnt == CNT_W'(10), $sformatf("10 events aggregated during drain, fill=%0d", fill_cnt));
    for (int i = 0; i < 10; i++) sent.push_back(mk(200 + i, (i == 6) ? 32760 : 20 + i));
    chk(!flush_req, "batch drained");

    // --- C: deadline flush; minimum over wrap is 32760
    chk(min_ts == ts_t'(32760), $sformatf("wrap-around minimum %0d", min_ts));
    threshold = ts_t'(32759);
    repeat (3) @(posedge clk); #1;
    chk(!flush_req && fill_cnt == CNT_W'(10), "no flush before deadline");
    threshold = ts_t'(32760);
    @(posedge clk); #1;
    chk(trigger_flush && flush_cause[0], "deadline trigger");
    @(posedge clk); #1;
    chk(flush_req, "deadline flush");
    threshold = 0;
    drain(10, "deadline");

    // --- D: external trigger on an empty bucket does nothing
    ext_trigger = 1; @(posedge clk); #1 ext_trigger = 0;
    repeat (3) @(posedge clk); #1;
    chk(idle && !flush_req, "ext trigger on empty bucket ignored");

    // --- E: external trigger
    for (int i = 0; i < 5; i++) push(mk(300 + i, 15000));
    repeat (3) @(posedge clk); #1;
    chk(!flush_req, "no flush without trigger");
    ext_trigger = 1; @(posedge clk); #1 ext_trigger = 0;
    @(posedge clk); #1;
    chk(flush_req && out_total == CNT_W'(5), "external flush");
    drain(5, "ext");
    @(posedge clk); #1;
    chk(idle, "idle after directed phases");

    // --- F: random traffic against the reference queue
    rnd_on = 1;
    for (int t = 0; t < 30000; t++) begin
      in_valid    = ($urandom % 4 != 0);
      in_event    = '{guid: guid_t'($urandom), ts: ts_t'($urandom)};
      threshold   = ts_t'($urandom);
      ext_trigger = ($urandom % 64 == 0);
      out_pop     = flush_req && ($urandom % 3 != 0);
      @(posedge clk); #1;
    end
    in_valid = 0;
    for (int t = 0; t < 2000 && !idle; t++) begin
      ext_trigger = ($urandom % 8 == 0);
      out_pop     = flush_req;
      @(posedge clk); #1;
    end
    ext_trigger = 0; out_pop = 0;
    @(posedge clk); #1;
    rnd_on = 0;
    chk(idle && ref_q.size() == 0 && batch_rem == 0,
        $sformatf("random: all events sent (%0d left)", ref_q.size()));
    chk(rnd_batches > 100, $sformatf("random: %0d batches, %0d groups", rnd_batches, rnd_groups));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
