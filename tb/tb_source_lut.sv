// tb_source_lut: fills the 32768-entry table with a hash of the index, then
// reads random indices and checks the entry one clock after rd_en, and that
// the output holds while rd_en is low.
module tb_source_lut;
  import bss_pkg::*;
  logic clk = 0;
  logic cfg_we, rd_en;
  logic [14:0] cfg_index, rd_index;
  src_entry_t cfg_entry, rd_entry;
  int checks = 0, failures = 0;

  source_lut dut (.*);
  always #5 clk = ~clk;

  function automatic src_entry_t f(logic [14:0] i);
    return src_entry_t'({16'(i * 16'd40503 + 16'd7), 15'(i ^ 15'h2a5a)});
  endfunction

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
    src_entry_t last;
    cfg_we = 0; rd_en = 0; cfg_index = 0; rd_index = 0; cfg_entry = '0;
    for (int i = 0; i < 32768; i++) begin
      cfg_we = 1; cfg_index = 15'(i); cfg_entry = f(15'(i));
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int t = 0; t < 5000; t++) begin
      rd_en = (t == 0) || (($urandom % 4) != 0);
      rd_index = 15'($urandom);
      @(posedge clk); #1;
      if (rd_en) begin
        chk(rd_entry == f(rd_index), "entry");
        last = rd_entry;
      end else chk(rd_entry == last, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
