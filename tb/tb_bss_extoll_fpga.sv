// tb_bss_extoll_fpga: whole-design test at the default parameters. The
// network is a loopback: outgoing messages come back as received messages
// (with random back-pressure), so every spike event travels HICANN link ->
// router -> input buffer -> buckets -> framer -> network -> distributor ->
// HICANN links. A behavioural host takes the ring-buffer writes and returns
// credits.
// Tables: source entry {link, address} -> destination dests[address % 30],
// GUID = {link, address}; GUID -> multicast mask derived from the GUID (some
// masks zero, many with several links). Every event sent must arrive, as
// {GUID, timestamp}, exactly once on each link of its mask.
// Phases: mixed traffic on many destinations with near deadlines; a burst
// into one destination (full flushes, aggregation during drain); the same
// with heavy network back-pressure (full bucket stall). Host data flows
// throughout, first with a slow host (ring full), then a fast one.
// Phase 2 also checks the input rate: with all HICANN outputs ready, 2000
// events must enter the aggregation at one per clock, losing at most two
// clocks per full flush.
// Each mechanism must have happened at least once.
module tb_bss_extoll_fpga;
  import bss_pkg::*;
  localparam int L = 8;
  localparam int WB = 16, RING_WORDS = 64;
  localparam logic [63:0] START = 64'h0000_0002_0000_0000;

  logic clk = 0, rst_n = 0;
  ts_t now = 0, margin = 16;
  logic [L-1:0] hicann_in_valid, hicann_in_ready, hicann_out_valid, hicann_out_ready;
  hicann_event_t hicann_in_event [L];
  net_event_t hicann_out_event;
  logic tx_valid, tx_ready, tx_sop, tx_eop, rx_valid, rx_ready, rx_sop, rx_eop;
  logic [WORD_W-1:0] tx_data, rx_data;
  logic src_cfg_we, dst_cfg_we;
  logic [14:0] src_cfg_index;
  src_entry_t src_cfg_entry;
  guid_t dst_cfg_guid;
  logic [L-1:0] dst_cfg_mask;
  logic rb_cfg_init;
  logic [63:0] rb_cfg_start, rb_cfg_end, put_addr, rb_write_addr;
  logic hd_valid, hd_ready, hd_last;
  logic [WORD_W-1:0] hd_data, put_data;
  logic put_valid, put_ready, put_first, put_last, put_notify, put_nodata;
  logic [31:0] put_noti_bytes, rb_fill_level, rb_free_space, rb_space;
  logic host_noti_valid;
  logic [31:0] host_noti_bytes;
  logic [4:0] inbuf_level;
  logic map_ready;
  logic [31:0] stat_agg [10];
  logic [31:0] stat_tx_messages, stat_rx_events, stat_rx_multicast;
  logic [31:0] stat_rb [3];
  int checks = 0, failures = 0;

  bss_extoll_fpga dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1'b1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- tables
  dest_t dests [30];
  function automatic logic [7:0] mask_of(guid_t g);
    return (g[4:0] == 5'd0) ? 8'h00 : (8'(g * 15'd89) ^ 8'(g >> 7)) | 8'(1 << g[2:0]);
  endfunction

  // ---------------------------------------------------- network loopback
  int net_bp = 0;     // 0 none, 1 light, 2 heavy
  logic gate = 1;
  always @(posedge clk) gate <= (net_bp == 0) ? 1'b1 : (net_bp == 1) ? ($urandom % 4 != 0) : ($urandom % 10 == 0);
  assign rx_valid = tx_valid && gate;
  assign tx_ready = rx_ready && gate;
  assign rx_sop   = tx_sop;
  assign rx_eop   = tx_eop;
  assign rx_data  = tx_data;

  // ------------------------------------------------------- HICANN side
  hicann_event_t src_q [L][$];
  int expect_cnt [logic [32:0]];   // {link, guid, ts} -> count
  int n_expected = 0, n_arrived = 0, n_sent = 0;

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < L; l++)
      if (hicann_in_valid[l] && hicann_in_ready[l]) begin
        hicann_event_t e;
        guid_t g;
        e = src_q[l].pop_front();
        g = guid_t'({3'(l), e.addr});
        n_sent++;
        for (int m = 0; m < L; m++) if (mask_of(g)[m]) begin
          expect_cnt[{3'(m), g, e.ts}]++;
          n_expected++;
        end
      end
  end

  initial hicann_out_ready = '1;
  initial put_ready = 1;
  always @(posedge clk) put_ready <= ($urandom % 8 != 0);
  bit out_fast = 0;   // all HICANN outputs ready, for the rate measurement
  always @(posedge clk) hicann_out_ready <= out_fast ? '1 : L'($urandom) | L'($urandom);
  always @(posedge clk) if (rst_n)
    for (int m = 0; m < L; m++) if (hicann_out_valid[m] && hicann_out_ready[m]) begin
      logic [32:0] k;
      k = {3'(m), hicann_out_event.guid, hicann_out_event.ts};
      chk(expect_cnt.exists(k) && expect_cnt[k] != 0, "event at a HICANN link matches the multicast masks");
      if (expect_cnt.exists(k) && expect_cnt[k] != 0) begin
        expect_cnt[k]--;
        if (expect_cnt[k] == 0) expect_cnt.delete(k);
        n_arrived++;
      end
    end

  // ------------------------------------------------------- host side
  logic [WORD_W-1:0] hostmem [RING_WORDS];
  int hd_n = 0, hd_written = 0, hd_notified = 0, hd_consumed = 0, hd_pending = 0;
  int host_rate = 6, hd_bad = 0;
  function automatic logic [WORD_W-1:0] hdat(int i);
    return {32'(i), 32'hfeed0000 ^ 32'(i), 32'(i * 5), 32'(~i)};
  endfunction
  always @(posedge clk) if (rst_n && put_valid && put_ready && !put_nodata) begin
    if (put_addr != START + 64'((hd_written % RING_WORDS) * WB) || put_data != hdat(hd_written)) hd_bad++;
    hostmem[hd_written % RING_WORDS] = put_data;
    hd_written++;
  end
  always @(posedge clk) if (rst_n && put_valid && put_ready && put_notify)
    hd_notified += int'(put_noti_bytes) / WB;
  always @(posedge clk) begin
    host_noti_valid <= 0;
    if (rst_n) begin
      if (hd_consumed < hd_notified && ($urandom % host_rate == 0)) begin
        if (hostmem[hd_consumed % RING_WORDS] != hdat(hd_consumed)) hd_bad++;
        hd_consumed++;
        hd_pending += WB;
      end
      if (hd_pending > 0 && ($urandom % 4 == 0)) begin
        host_noti_valid <= 1;
        host_noti_bytes <= 32'(hd_pending);
        hd_pending = 0;
      end
    end
  end
  bit hd_on = 0;
  always @(posedge clk) if (rst_n) begin
    if (hd_valid && hd_ready) hd_n++;
  end

  // sources are refreshed shortly after each clock edge
  always begin
    @(posedge clk);
    #2;
    for (int l = 0; l < L; l++) begin
      hicann_in_valid[l] = src_q[l].size() > 0;
      hicann_in_event[l] = (src_q[l].size() > 0) ? src_q[l][0] : '0;
    end
    hd_valid = hd_on && ($urandom % 10 != 0);
    hd_data  = hdat(hd_n);
    hd_last  = (hd_n % 50 == 49);
  end
  initial begin hicann_in_valid = '0; hd_valid = 0; hd_data = '0; hd_last = 0; end

  task automatic report(input string phase);
    $display("%s: sent %0d agg %0d rx %0d msgs %0d | dl %0d full %0d ext %0d ev %0d | ring words %0d space %0d free %0d",
             phase, n_sent, stat_agg[0], stat_rx_events, stat_tx_messages, stat_agg[6], stat_agg[7],
             stat_agg[8], stat_agg[2], hd_n, rb_space, rb_free_space);
  endtask

  task automatic wait_drained(input int limit);
    int guard = 0;
    int queued;
    queued = 1;
    while ((n_arrived < n_expected || queued > 0) && guard < limit) begin
      queued = 0;
      for (int l = 0; l < L; l++) queued += src_q[l].size();
      @(posedge clk); #1; guard++;
    end
    chk(n_arrived == n_expected && expect_cnt.size() == 0,
        $sformatf("all events arrived: %0d of %0d", n_arrived, n_expected));
  endtask

  initial begin
    src_cfg_we = 0; dst_cfg_we = 0; src_cfg_index = 0; src_cfg_entry = '0;
    dst_cfg_guid = 0; dst_cfg_mask = 0; rb_cfg_init = 0;
    rb_cfg_start = START; rb_cfg_end = START + 64'(RING_WORDS * WB);
    for (int i = 0; i < 30; i++) dests[i] = dest_t'(i * 2179 + 11);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // configuration
    rb_cfg_init = 1; @(posedge clk); #1 rb_cfg_init = 0;
    for (int i = 0; i < 32768; i++) begin
      src_cfg_we = 1; src_cfg_index = 15'(i);
      src_cfg_entry = '{dest: dests[i[11:0] % 30], guid: guid_t'(i)};
      dst_cfg_we = 1; dst_cfg_guid = guid_t'(i); dst_cfg_mask = mask_of(guid_t'(i));
      @(posedge clk); #1;
    end
    src_cfg_we = 0; dst_cfg_we = 0;
    while (!map_ready) begin @(posedge clk); #1; end
    hd_on = 1;

    // phase 1: mixed traffic, near deadlines, light network back-pressure
    net_bp = 1;
    for (int r = 0; r < 12; r++) begin
      for (int l = 0; l < L; l++)
        for (int k = 0; k < 150; k++)
          src_q[l].push_back('{ts: ts_t'(now + 40 + ($urandom % 150)), addr: 12'($urandom)});
      while (src_q[0].size() > 20) begin @(posedge clk); #1; end
    end
    wait_drained(50000);
    report("phase 1");

    // phase 2: one destination at full rate, distant deadlines
    begin : p2
    logic [31:0] c0;
    time t0;
    net_bp = 0;
    host_rate = 1;
    for (int l = 0; l < L; l++)
      for (int k = 0; k < 250; k++)
        src_q[l].push_back('{ts: ts_t'(now + 3000), addr: 12'(30 * ((k * 8 + l) % 136))});
    out_fast = 1;
    c0 = stat_agg[0];
    while (stat_agg[0] == c0) begin @(posedge clk); #1; end
    t0 = $time;
    while (stat_agg[0] < c0 + 32'(2000)) begin @(posedge clk); #1; end
    // input rate: one event per clock, at most two lost clocks per full flush
    chk(($time - t0) / 10 <= 2000 + 2 * ((2000 + MAX_EVENTS - 1) / MAX_EVENTS),
        $sformatf("2000 events into one bucket in %0d clocks", ($time - t0) / 10));
    $display("phase 2: 2000 events into one bucket in %0d clocks", ($time - t0) / 10);
    out_fast = 0;
    wait_drained(50000);
    report("phase 2");
    end

    // phase 3: heavy network back-pressure
    net_bp = 2;
    for (int l = 0; l < L; l++)
      for (int k = 0; k < 100; k++)
        src_q[l].push_back('{ts: ts_t'(now + 6000), addr: 12'(30 * ((k * 8 + l) % 136))});
    wait_drained(100000);
    report("phase 3");
    net_bp = 0;
    hd_on = 0;
    repeat (500) @(posedge clk); #1;

    // results and mechanisms
    chk(hd_bad == 0, "host data and addresses");
    chk(hd_consumed == hd_n && rb_fill_level == 0, $sformatf("host got all %0d words", hd_n));
    chk(stat_agg[0] == 32'(n_sent), "aggregation saw every event");
    chk(stat_rx_events == 32'(n_sent), "receiver retired every event");
    chk(stat_agg[6] > 0, "mechanism: deadline flush");
    chk(stat_agg[7] > 0, "mechanism: full flush");
    chk(stat_agg[8] > 0 && stat_agg[2] > 0, "mechanism: eviction with external flush");
    chk(stat_agg[5] > 0, "mechanism: stall for a free bucket");
    chk(stat_agg[4] > 0, "mechanism: stall on a full bucket");
    chk(stat_agg[9] > 0, "mechanism: aggregation during drain");
    chk(stat_agg[3] > 0, "mechanism: bucket release");
    chk(stat_rx_multicast > 0, "mechanism: multicast");
    chk(stat_rb[1] > 0, "mechanism: ring wrap");
    chk(stat_rb[2] > 0, "mechanism: ring full stall");
    chk(stat_rb[0] > 0, "mechanism: notifications");
    $display("events %0d -> deliveries %0d, messages %0d (%0.2f events/message)",
             n_sent, n_arrived, stat_tx_messages, real'(n_sent) / real'(stat_tx_messages));
    $display("flushes: deadline %0d full %0d ext %0d; evictions %0d releases %0d; stalls nofree %0d full %0d; overlap %0d",
             stat_agg[6], stat_agg[7], stat_agg[8], stat_agg[2], stat_agg[3], stat_agg[5], stat_agg[4], stat_agg[9]);
    $display("ring: words %0d notifications %0d wraps %0d stall cycles %0d; multicast %0d",
             hd_n, stat_rb[0], stat_rb[1], stat_rb[2], stat_rx_multicast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
