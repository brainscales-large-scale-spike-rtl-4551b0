// tb_sync_fifo: self-checking test of the input-buffer FIFO. Random pushes
// and pops are compared with a queue model: data order, in_ready exactly when
// fewer than DEPTH words are held, out_valid exactly when not empty, level.
module tb_sync_fifo;
  localparam int W = 46, D = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fulls = 0;
    bit pushed, popped;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      // phases: fill-biased, drain-biased, balanced
      int pin, pout;
      pin  = (cyc % 1000 < 400) ? 80 : (cyc % 1000 < 700) ? 20 : 50;
      pout = 100 - pin;
      in_valid  = ($urandom % 100) < pin;
      out_ready = ($urandom % 100) < pout;
      in_data   = {$urandom, $urandom};
      #1;
      chk(in_ready == (model.size() < D), "in_ready");
      chk(out_valid == (model.size() > 0), "out_valid");
      chk(level == model.size(), "level");
      if (out_valid) chk(out_data == model[0], "data order");
      if (!in_ready) fulls++;
      popped = out_valid && out_ready;
      pushed = in_valid && in_ready;
      @(posedge clk);
      if (popped) void'(model.pop_front());
      if (pushed) model.push_back(in_data);
      #1;
    end
    chk(fulls > 0, "FIFO was full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
