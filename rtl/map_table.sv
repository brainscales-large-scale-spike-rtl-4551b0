// map_table: bucket renaming table. Indexed by the 16-bit network destination
// it returns whether a bucket is assigned to that destination (hit) and which
// one (hit_id). set_en writes {valid, id} for set_dest when a free bucket is
// assigned; clr_en clears the entry of clr_dest when a bucket is released or
// evicted (the bucket's Dest register supplies clr_dest). If both address the
// same entry in one clock, set wins.
// Read is combinational. After reset the valid bits are cleared by a sweep,
// one entry per clock; ready stays low (and hit is forced low) until the sweep
// has covered all 2^DEST_W entries. The function follows the paper; the RAM
// organisation and the sweep are this design's choices.
module map_table
  import bss_pkg::*;
#(
  parameter int unsigned D_W = DEST_W,
  parameter int unsigned N   = 16,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  output logic           ready,
  input  logic [D_W-1:0] lookup_dest,
  output logic           hit,
  output logic [IW-1:0]  hit_id,
  input  logic           set_en,
  input  logic [D_W-1:0] set_dest,
  input  logic [IW-1:0]  set_id,
  input  logic           clr_en,
  input  logic [D_W-1:0] clr_dest
);
  typedef struct packed {
    logic          valid;
    logic [IW-1:0] id;
  } entry_t;

  entry_t        mem [2**D_W];
  logic [D_W:0]  sweep;          // MSB set: sweep finished
  entry_t        rd;

  assign ready  = sweep[D_W];
  assign rd     = mem[lookup_dest];
  assign hit    = ready && rd.valid;
  assign hit_id = rd.id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sweep <= '0;
    else if (!sweep[D_W]) sweep <= sweep + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!ready)      mem[sweep[D_W-1:0]] <= '0;
    else if (set_en) mem[set_dest]       <= '{valid: 1'b1, id: set_id};
    if (ready && clr_en && !(set_en && set_dest == clr_dest))
      mem[clr_dest] <= '0;
  end
endmodule
