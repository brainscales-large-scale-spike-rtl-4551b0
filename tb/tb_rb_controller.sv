// tb_rb_controller: a behavioural host with a 50-word ring (not a power of
// two) consumes the written data in order, slowly at first so that the ring
// fills, and returns credits by notification. Checked: every word lands at
// the next ring address with the right data, the address wraps from End to
// Start, no unprocessed word is overwritten, bursts are at most 31 words and
// each ends with a notification carrying its byte count (a notification-only
// put when the source goes idle), Filling-Level and
// Free-Space match the host's view, and with a fast host one word per clock.
module tb_rb_controller;
  localparam int WB = 16, RING_WORDS = 50;
  localparam logic [63:0] START = 64'h0000_0001_0000_1000;
  localparam logic [63:0] END_A = START + 64'(RING_WORDS * WB);
  logic clk = 0, rst_n = 0;
  logic cfg_init, in_valid, in_ready, in_last;
  logic [63:0] cfg_start, cfg_end, put_addr, write_addr;
  logic [127:0] in_data, put_data;
  logic put_valid, put_ready, put_first, put_last, put_notify, put_nodata;
  logic [31:0] put_noti_bytes, space, fill_level, free_space;
  logic host_noti_valid;
  logic [31:0] host_noti_bytes, stat_notifications, stat_wraps, stat_stall_cycles;
  int checks = 0, failures = 0;

  rb_controller dut (.*);
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

  // host memory and host view
  logic [127:0] hostmem [RING_WORDS];
  int  exp_word = 0;          // index of next data word the FPGA must write
  int  written = 0;           // words written, not yet released
  int  notified_bytes = 0;    // bytes announced by notifications
  int  consumed = 0;          // words the host has read
  int  burst_len = 0, max_burst = 0;
  int  host_rate = 8;         // host reads with probability 1/host_rate
  int  pending_credit = 0;

  function automatic logic [127:0] dat(int i);
    return {32'(i), 32'(i * 7), 32'hcafe0000 | 32'(i), 32'(~i)};
  endfunction

  // FPGA-to-host writes: check as they are taken
  int closes = 0;
  always @(posedge clk) if (rst_n && put_valid && put_ready && put_nodata) begin
    chk(put_notify && put_last && burst_len > 0, "notification-only put closes a burst");
    chk(put_noti_bytes == 32'(burst_len * WB), "closing notification byte count");
    notified_bytes += burst_len * WB;
    burst_len = 0;
    closes++;
  end
  always @(posedge clk) if (rst_n && put_valid && put_ready && !put_nodata) begin
    int slot;
    slot = exp_word % RING_WORDS;
    chk(put_addr == START + 64'(slot * WB), $sformatf("address %h slot %0d", put_addr, slot));
    chk(put_data == dat(exp_word), "data");
    chk(written < RING_WORDS, "no overwrite of unprocessed data");
    hostmem[slot] = put_data;
    chk(put_first == (burst_len == 0), "first flag");
    burst_len++;
    if (put_last) begin
      chk(put_notify, "notification on last word");
      chk(put_noti_bytes == 32'(burst_len * WB), "notification byte count");
      notified_bytes += burst_len * WB;
      if (burst_len > max_burst) max_burst = burst_len;
      burst_len = 0;
    end
    exp_word++;
    written++;
  end

  // host: reads notified data in order and returns credits in batches
  always @(posedge clk) begin
    host_noti_valid <= 0;
    if (rst_n) begin
      if (consumed * WB < notified_bytes && ($urandom % host_rate == 0)) begin
        chk(hostmem[consumed % RING_WORDS] == dat(consumed), "host reads data in order");
        consumed++;
        pending_credit += WB;
      end
      if (pending_credit > 0 && ($urandom % 3 == 0)) begin
        host_noti_valid <= 1;
        host_noti_bytes <= 32'(pending_credit);
        written -= pending_credit / WB;
        pending_credit = 0;
      end
    end
  end

  int n_in = 0;
  initial begin
    int t0, w0;
    cfg_init = 0; in_valid = 0; in_last = 0; in_data = 0; put_ready = 1;
    host_noti_valid = 0; host_noti_bytes = 0; cfg_start = START; cfg_end = END_A;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cfg_init = 1; @(posedge clk); #1 cfg_init = 0;
    chk(space == 32'(RING_WORDS * WB) && free_space == space && write_addr == START, "ring set up");
    // phase 1: slow host, source always has data
    while (n_in < 600) begin
      in_valid = 1; in_data = dat(n_in); in_last = (n_in % 40 == 39);
      put_ready = ($urandom % 5 != 0);
      #1;
      if (in_ready) begin
        @(posedge clk); #1; n_in++;
      end else begin
        @(posedge clk); #1;
      end
    end
    in_valid = 0; put_ready = 1;
    // phase 2: fast host, rate check
    host_rate = 1;
    repeat (200) @(posedge clk); #1;
    chk(fill_level <= 32'(RING_WORDS * WB), "fill level in range");
    w0 = exp_word; t0 = $time;
    for (int k = 0; k < 20; k++) begin
      in_valid = 1; in_data = dat(n_in); in_last = 0;
      #1 chk(in_ready, "fast host: ready");
      @(posedge clk); #1; n_in++;
    end
    in_valid = 0;
    chk(exp_word - w0 == 20, "one word per clock");
    repeat (200) @(posedge clk); #1;
    chk(fill_level == 0 && free_space == space, "all credits back");
    chk(stat_wraps > 5, "ring wrapped");
    chk(stat_stall_cycles > 0, "source stalled on full ring");
    chk(max_burst <= 31 && max_burst >= 20, $sformatf("burst limit (max %0d)", max_burst));
    chk(consumed == n_in, "host consumed everything");
    chk(closes > 0, "idle source closed a burst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
