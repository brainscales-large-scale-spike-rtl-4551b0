// tb_free_list: after reset the list must hand out buckets 0..N-1 in order,
// then report empty; returned buckets must come back in the order returned,
// also with push and pop in the same clock.
module tb_free_list;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic pop, nonempty, push;
  logic [3:0] head_id, push_id;
  logic [4:0] count;
  int checks = 0, failures = 0;
  logic [3:0] model [$];

  free_list #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pop = 0; push = 0; push_id = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1;
    for (int i = 0; i < N; i++) model.push_back(4'(i));
    for (int cyc = 0; cyc < 4000; cyc++) begin
      pop  = model.size() > 0 && ($urandom % 2);
      push = 0;
      if (model.size() < N && ($urandom % 2)) begin
        // return a bucket that is not in the list
        logic [3:0] cand;
        do cand = 4'($urandom); while (cand inside {model});
        push = 1; push_id = cand;
      end
      if (cyc < N) begin pop = 1; push = 0; end
      #1;
      chk(nonempty == (model.size() > 0), "nonempty");
      chk(count == model.size(), "count");
      if (model.size() > 0) chk(head_id == model[0], $sformatf("head %0d exp %0d", head_id, model[0]));
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_id);
      #1;
      if (cyc == N-1) chk(!nonempty, "empty after handing out all buckets");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
