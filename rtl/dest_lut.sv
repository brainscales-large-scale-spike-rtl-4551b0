// dest_lut: receiver-side lookup table. The GUID of a received event indexes
// the table, which returns a multicast mask with one bit per HICANN link of
// this FPGA; the event is delivered to every link whose bit is set.
// What the table returns follows the paper; the synchronous read (mask valid
// one clock after rd_en) and the configuration write port are this design's
// choices. Entries are not reset; software writes them before use.
module dest_lut
  import bss_pkg::*;
#(
  parameter int unsigned G_W     = GUID_W,
  parameter int unsigned N_LINKS = N_HICANN
) (
  input  logic               clk,
  input  logic               cfg_we,
  input  logic [G_W-1:0]     cfg_guid,
  input  logic [N_LINKS-1:0] cfg_mask,
  input  logic               rd_en,
  input  logic [G_W-1:0]     rd_guid,
  output logic [N_LINKS-1:0] rd_mask
);
  logic [N_LINKS-1:0] mem [2**G_W];

  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_guid] <= cfg_mask;
    if (rd_en)  rd_mask       <= mem[rd_guid];
  end
endmodule
