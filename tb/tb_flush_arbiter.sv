// tb_flush_arbiter: random requests and timestamps, including deadlines
// already passed and wrap-around of the 15-bit time; the grant must be one-hot
// on the requester with the smallest signed distance key - now (lowest index
// on ties), computed here with plain integers.
module tb_flush_arbiter;
  import bss_pkg::*;
  localparam int N = 16;
  logic [N-1:0] req, grant;
  ts_t key [N];
  ts_t now;
  int checks = 0, failures = 0;

  flush_arbiter #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int best, bestd;
      now = ts_t'($urandom);
      req = N'($urandom);
      if (t % 7 == 0) req = '0;
      for (int i = 0; i < N; i++) begin
        int off;
        off = int'($urandom % 2000) - 500;     // some overdue, some ahead
        if (t % 5 == 0) off = int'($urandom % 4);  // many ties
        key[i] = ts_t'(int'(now) + off);
      end
      #1;
      best = -1; bestd = 0;
      for (int i = 0; i < N; i++) begin
        int d;
        d = (int'(key[i]) - int'(now) + 32768 + 16384) % 32768 - 16384;
        if (req[i] && (best < 0 || d < bestd)) begin best = i; bestd = d; end
      end
      if (best < 0) chk(grant == '0, "no grant without request");
      else chk(grant == (N'(1) << best), $sformatf("grant %h exp bit %0d", grant, best));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
