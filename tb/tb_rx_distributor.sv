// tb_rx_distributor: programs the GUID table with masks derived from the GUID
// (some zero, many with several bits), sends messages of random size with
// random gaps while the links accept at random, and checks that every link
// receives exactly the events whose mask has its bit, in message order.
// With all links ready, a full 124-event message must be distributed at one
// event per clock.
module tb_rx_distributor;
  import bss_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  logic rx_valid, rx_ready, rx_sop, rx_eop;
  logic [WORD_W-1:0] rx_data;
  logic cfg_we;
  guid_t cfg_guid;
  logic [L-1:0] cfg_mask, hic_valid, hic_ready;
  net_event_t hic_event;
  logic [31:0] stat_events, stat_multicast;
  int checks = 0, failures = 0;
  net_event_t exp_q [L][$];
  int n_sent = 0;

  rx_distributor dut (.*);
  always #5 clk = ~clk;

  function automatic logic [7:0] f(guid_t g);
    return (g[3:0] == 4'd0) ? 8'h00 : 8'(g * 15'd73) ^ 8'(g >> 8);
  endfunction

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

  bit bp = 1;
  initial hic_ready = '1;
  always @(posedge clk) hic_ready <= bp ? L'($urandom) : '1;

  task automatic put_word(input logic [WORD_W-1:0] w, input bit sop, input bit eop, input bit gaps);
    while (gaps && ($urandom % 3 == 0)) begin rx_valid = 0; @(posedge clk); #1; end
    rx_valid = 1; rx_data = w; rx_sop = sop; rx_eop = eop;
    #1;
    while (!rx_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    rx_valid = 0;
  endtask

  task automatic send_msg(input int n, input bit gaps);
    msg_header_t h;
    h = '{reserved: '0, count: CNT_W'(n), dest: 16'h77};
    put_word(WORD_W'(h), 1, 0, gaps);
    for (int w = 0; w < (n + 3) / 4; w++) begin
      logic [WORD_W-1:0] d;
      d = '0;
      for (int k = 0; k < 4; k++) if (w * 4 + k < n) begin
        net_event_t e;
        e = '{guid: guid_t'($urandom), ts: ts_t'(n_sent)};
        d[k*32 +: 32] = ev_to_slot(e);
        for (int l = 0; l < L; l++) if (f(e.guid)[l]) exp_q[l].push_back(e);
        n_sent++;
      end
      put_word(d, 0, w == (n + 3) / 4 - 1, gaps);
    end
  endtask

  int received [L];
  always @(posedge clk) if (rst_n)
    for (int l = 0; l < L; l++) if (hic_valid[l] && hic_ready[l]) begin
      received[l]++;
      if (exp_q[l].size() == 0) chk(0, "unexpected event");
      else chk(hic_event == exp_q[l].pop_front(), $sformatf("link %0d event", l));
    end

  initial begin
    int t0, e0;
    rx_valid = 0; rx_sop = 0; rx_eop = 0; rx_data = '0; cfg_we = 0; cfg_guid = 0; cfg_mask = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 32768; i++) begin
      cfg_we = 1; cfg_guid = guid_t'(i); cfg_mask = f(guid_t'(i));
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int m = 0; m < 60; m++) send_msg((m % 6 == 0) ? 124 : 1 + $urandom % 124, 1);
    bp = 0;
    repeat (200) @(posedge clk); #1;
    for (int l = 0; l < L; l++) chk(exp_q[l].size() == 0, $sformatf("link %0d got all", l));
    chk(stat_events == 32'(n_sent), "all events retired");
    chk(stat_multicast > 0, "multicast happened");
    // rate: 124 events, all links ready
    e0 = int'(stat_events);
    t0 = $time;
    send_msg(124, 0);
    while (int'(stat_events) - e0 < 124) begin @(posedge clk); #1; end
    chk(($time - t0) / 10 <= 124 + 4, $sformatf("124 events in %0d clocks", ($time - t0) / 10));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
