// tb_map_table: after the reset sweep every destination must miss; set and
// clear operations (also to the same entry in one clock, where set wins) are
// compared with an associative-array model on random lookups.
module tb_map_table;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic ready, hit, set_en, clr_en;
  logic [15:0] lookup_dest, set_dest, clr_dest;
  logic [3:0]  hit_id, set_id;
  int checks = 0, failures = 0;
  int model [int];

  map_table #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc_ready = 0, same = 0;
    set_en = 0; clr_en = 0; lookup_dest = 0; set_dest = 0; clr_dest = 0; set_id = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (!ready) begin @(posedge clk); cyc_ready++; #1; end
    chk(cyc_ready >= 65535 && cyc_ready <= 65537, $sformatf("sweep took %0d clocks", cyc_ready));
    for (int i = 0; i < 300; i++) begin
      lookup_dest = 16'($urandom);
      #1 chk(!hit, "miss after sweep");
    end
    for (int cyc = 0; cyc < 20000; cyc++) begin
      // a small destination range makes hits and conflicts frequent
      set_en   = ($urandom % 3) == 0;
      set_dest = 16'($urandom % 64) << 7;
      set_id   = 4'($urandom);
      clr_en   = ($urandom % 3) == 0;
      clr_dest = (($urandom % 4) == 0) ? set_dest : 16'($urandom % 64) << 7;
      lookup_dest = 16'($urandom % 64) << 7;
      #1;
      chk(hit == model.exists(int'(lookup_dest)), "hit");
      if (hit && model.exists(int'(lookup_dest))) chk(hit_id == 4'(model[int'(lookup_dest)]), "hit_id");
      @(posedge clk);
      if (clr_en && !(set_en && set_dest == clr_dest)) model.delete(int'(clr_dest));
      if (set_en) model[int'(set_dest)] = int'(set_id);
      if (set_en && clr_en && set_dest == clr_dest) same++;
      #1;
    end
    chk(same > 0, "set and clear of one entry in one clock occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
