// tb_dest_lut: fills the GUID table with masks derived from the GUID, then
// checks random reads one clock after rd_en and that the output holds while
// rd_en is low; a rewrite of one entry must be seen by the next read.
module tb_dest_lut;
  import bss_pkg::*;
  logic clk = 0;
  logic cfg_we, rd_en;
  guid_t cfg_guid, rd_guid;
  logic [7:0] cfg_mask, rd_mask;
  int checks = 0, failures = 0;

  dest_lut dut (.*);
  always #5 clk = ~clk;

  function automatic logic [7:0] f(guid_t g);
    return 8'(g * 15'd73) ^ 8'(g >> 8);
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
    logic [7:0] last;
    cfg_we = 0; rd_en = 0; cfg_guid = 0; rd_guid = 0; cfg_mask = 0;
    for (int i = 0; i < 32768; i++) begin
      cfg_we = 1; cfg_guid = guid_t'(i); cfg_mask = f(guid_t'(i));
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int t = 0; t < 5000; t++) begin
      rd_en = (t == 0) || (($urandom % 4) != 0);
      rd_guid = guid_t'($urandom);
      @(posedge clk); #1;
      if (rd_en) begin chk(rd_mask == f(rd_guid), "mask"); last = rd_mask; end
      else chk(rd_mask == last, "hold");
    end
    cfg_we = 1; cfg_guid = 15'd5; cfg_mask = 8'ha5;
    @(posedge clk); #1;
    cfg_we = 0; rd_en = 1; rd_guid = 15'd5;
    @(posedge clk); #1;
    chk(rd_mask == 8'ha5, "rewrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
