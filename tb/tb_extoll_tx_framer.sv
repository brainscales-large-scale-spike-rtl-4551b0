// tb_extoll_tx_framer: sends batches of random size (1..124 events) with
// random back-pressure and checks each message: a header word with sop,
// destination and count, then ceil(n/4) payload words with the events in
// order, unused slots zero, eop on the last word. With no back-pressure a
// one-event message must take 2 clocks and a 124-event message 32 clocks.
module tb_extoll_tx_framer;
  import bss_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_first, in_last;
  dest_t in_dest;
  logic [CNT_W-1:0] in_total;
  logic [2:0] in_count;
  logic [GROUP-1:0][SLOT_W-1:0] in_slots;
  logic tx_valid, tx_ready, tx_sop, tx_eop;
  logic [WORD_W-1:0] tx_data;
  logic [31:0] stat_messages;
  int checks = 0, failures = 0;

  extoll_tx_framer dut (.*);
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

  function automatic logic [SLOT_W-1:0] ev(int b, int i);
    return SLOT_W'({15'(b * 131 + i), 15'(i * 3 + b)});
  endfunction

  bit bp = 1;
  initial tx_ready = 1;
  always @(posedge clk) tx_ready <= bp ? ($urandom % 4 != 0) : 1'b1;

  // source: one batch, groups presented like a bucket would
  task automatic send(input int b, input int n, input dest_t d);
    int done = 0;
    in_dest = d;
    while (done < n) begin
      int c;
      c = (n - done >= 4) ? 4 : n - done;
      in_valid = 1; in_first = (done == 0); in_last = (done + c == n);
      in_total = CNT_W'(n - done); in_count = 3'(c);
      for (int k = 0; k < 4; k++) in_slots[k] = (k < c) ? ev(b, done + k) : 32'hdeadbeef;
      #1;
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      done += c;
    end
    in_valid = 0;
  endtask

  // sink: check messages
  int msgs_seen = 0;
  int exp_n [$];
  dest_t exp_d [$];
  int word_i = -1, cur_n, cur_b;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (word_i < 0) begin
      msg_header_t h;
      h = msg_header_t'(tx_data);
      chk(tx_sop && !tx_eop, "header has sop");
      cur_n = exp_n.pop_front();
      chk(h.count == CNT_W'(cur_n), $sformatf("count %0d exp %0d", h.count, cur_n));
      chk(h.dest == exp_d.pop_front(), "dest");
      word_i = 0; cur_b = msgs_seen;
    end else begin
      for (int k = 0; k < 4; k++) begin
        int i;
        i = word_i * 4 + k;
        if (i < cur_n) chk(tx_data[k*32 +: 32] == ev(cur_b, i), $sformatf("event %0d", i));
        else chk(tx_data[k*32 +: 32] == '0, "padding");
      end
      chk(!tx_sop, "no sop on payload");
      chk(tx_eop == ((word_i + 1) * 4 >= cur_n), "eop");
      word_i++;
      if (word_i * 4 >= cur_n) begin word_i = -1; msgs_seen++; end
    end
  end

  initial begin
    int t0;
    in_valid = 0; in_first = 0; in_last = 0; in_dest = 0; in_total = 0; in_count = 0; in_slots = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 100; b++) begin
      int n;
      n = (b % 10 == 0) ? 124 : (b % 10 == 1) ? 1 : 1 + ($urandom % 124);
      exp_n.push_back(n); exp_d.push_back(dest_t'(b * 977));
      send(b, n, dest_t'(b * 977));
    end
    bp = 0;
    @(posedge clk); #1;
    // rate checks
    exp_n.push_back(1); exp_d.push_back(16'h1234);
    t0 = $time; send(100, 1, 16'h1234);
    chk(($time - t0) / 10 == 2, $sformatf("single event takes %0d clocks", ($time - t0) / 10));
    exp_n.push_back(124); exp_d.push_back(16'h4321);
    t0 = $time; send(101, 124, 16'h4321);
    chk(($time - t0) / 10 == 32, $sformatf("124 events take %0d clocks", ($time - t0) / 10));
    repeat (3) @(posedge clk); #1;
    chk(msgs_seen == 102 && stat_messages == 102, "all messages seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
