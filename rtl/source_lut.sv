// source_lut: sender-side lookup table. An event from HICANN link L with
// 12-bit pulse address A reads entry {L, A}, which holds the 16-bit network
// destination address and the GUID to send with the event.
// The paper gives what the table returns; the indexing by {link, address},
// the synchronous read (entry valid one clock after rd_en) and the separate
// configuration write port are this design's choices. Entries are not reset;
// software must write them before use.
module source_lut
  import bss_pkg::*;
#(
  parameter int unsigned N_LINKS = N_HICANN,
  parameter int unsigned A_W     = ADDR_W
) (
  input  logic                               clk,
  input  logic                               cfg_we,
  input  logic [$clog2(N_LINKS)+A_W-1:0]     cfg_index,
  input  src_entry_t                         cfg_entry,
  input  logic                               rd_en,
  input  logic [$clog2(N_LINKS)+A_W-1:0]     rd_index,
  output src_entry_t                         rd_entry
);
  localparam int unsigned DEPTH = N_LINKS << A_W;

  src_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_index] <= cfg_entry;
    if (rd_en)  rd_entry       <= mem[rd_index];
  end
endmodule
