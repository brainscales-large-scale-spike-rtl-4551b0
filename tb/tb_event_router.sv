// tb_event_router: programs the whole source table with an invertible hash of
// {link, address}, feeds random events on all eight links with random gaps
// and output back-pressure, and checks that every event comes out exactly
// once, per link in order, tagged with the table's destination and GUID.
// A second phase keeps all links busy and out_ready high and checks the rate
// of one event per clock.
module tb_event_router;
  import bss_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  logic [L-1:0] hicann_valid, hicann_ready;
  hicann_event_t hicann_event [L];
  logic cfg_we, out_valid, out_ready;
  logic [14:0] cfg_index;
  src_entry_t cfg_entry;
  tagged_event_t out_data;
  int checks = 0, failures = 0;
  hicann_event_t q [L][$];

  event_router dut (.*);
  always #5 clk = ~clk;

  function automatic src_entry_t f(logic [14:0] i);
    return src_entry_t'({16'(i * 16'd40503 + 16'd7), 15'(i ^ 15'h2a5a)});
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit   gaps = 1, bp = 1;
  int   received = 0;
  logic [L-1:0] offer;

  // link sources
  always_comb
    for (int l = 0; l < L; l++) begin
      hicann_valid[l] = offer[l] && q[l].size() > 0;
      hicann_event[l] = (q[l].size() > 0) ? q[l][0] : '0;
    end

  initial begin
    int total = 0, t0, n0;
    cfg_we = 0; cfg_index = 0; cfg_entry = '0; out_ready = 0; offer = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 32768; i++) begin
      cfg_we = 1; cfg_index = 15'(i); cfg_entry = f(15'(i));
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int l = 0; l < L; l++)
      for (int k = 0; k < 300; k++) begin
        q[l].push_back('{ts: ts_t'($urandom), addr: 12'($urandom)});
        total++;
      end
    // phase 1: random gaps and back-pressure
    while (received < total) begin
      offer     = gaps ? L'($urandom) : '1;
      out_ready = bp ? (($urandom % 3) != 0) : 1'b1;
      @(posedge clk); #1;
    end
    // phase 2: full rate
    for (int l = 0; l < L; l++)
      for (int k = 0; k < 100; k++) q[l].push_back('{ts: ts_t'(k), addr: 12'(k * 5 + l)});
    gaps = 0; bp = 0; offer = '1; out_ready = 1;
    repeat (5) @(posedge clk);
    #1 n0 = received; t0 = $time;
    repeat (400) @(posedge clk);
    #1 chk(received - n0 == 400, $sformatf("one event per clock: %0d in 400", received - n0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output order per link
  hicann_event_t exp_q [L][$];
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < L; l++)
      if (hicann_valid[l] && hicann_ready[l]) exp_q[l].push_back(q[l].pop_front());
    if (out_valid && out_ready) begin
      logic [14:0]   idx;
      int            link;
      hicann_event_t e;
      idx  = 15'(out_data.ev.guid ^ 15'h2a5a);
      link = int'(idx[14:12]);
      received++;
      if (exp_q[link].size() == 0) chk(0, "output without input");
      else begin
        e = exp_q[link].pop_front();
        chk(e.addr == idx[11:0], "address / order");
        chk(out_data.ev.ts == e.ts, "timestamp");
        chk(out_data.dest == f(idx).dest, "destination");
      end
    end
  end
endmodule
