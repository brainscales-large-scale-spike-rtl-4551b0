// event_router: front end of the sending path. It merges the event streams of
// the HICANN links into one stream of at most one event per clock and tags
// every event with its network destination and GUID from the source lookup
// table, producing the Dst/Pls pairs that enter the input buffer.
// A round-robin pointer chooses among the links with a waiting event, starting
// after the link served last. The chosen event's {link, pulse address} is the
// table index; the table answers one clock later, so the output is a single
// register stage (latency one clock, throughput one event per clock when
// out_ready stays high).
// The paper names this unit and gives the lookup; the round-robin merge and
// the valid/ready handshakes are this design's choices.
module event_router
  import bss_pkg::*;
#(
  parameter int unsigned N_LINKS = N_HICANN,
  localparam int unsigned LW     = $clog2(N_LINKS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_LINKS-1:0]   hicann_valid,
  output logic [N_LINKS-1:0]   hicann_ready,
  input  hicann_event_t        hicann_event [N_LINKS],
  // source table configuration
  input  logic                 cfg_we,
  input  logic [LW+ADDR_W-1:0] cfg_index,
  input  src_entry_t           cfg_entry,
  // tagged events
  output logic                 out_valid,
  input  logic                 out_ready,
  output tagged_event_t        out_data
);
  logic [LW-1:0]  rr_q, pick;
  logic           any, take;
  logic           s1_valid;
  ts_t            s1_ts;
  src_entry_t     entry;

  always_comb begin
    pick = rr_q;
    any  = 1'b0;
    for (int k = N_LINKS; k >= 1; k--) begin
      int unsigned j;
      j = (int'(rr_q) + k) % N_LINKS;
      if (hicann_valid[j]) begin
        pick = LW'(j);
        any  = 1'b1;
      end
    end
  end

  assign take = any && (!s1_valid || out_ready);

  always_comb begin
    hicann_ready = '0;
    if (take) hicann_ready[pick] = 1'b1;
  end

  source_lut #(.N_LINKS(N_LINKS)) u_lut (
    .clk,
    .cfg_we, .cfg_index, .cfg_entry,
    .rd_en   (take),
    .rd_index({pick, hicann_event[pick].addr}),
    .rd_entry(entry)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q     <= LW'(N_LINKS-1);
      s1_valid <= 1'b0;
      s1_ts    <= '0;
    end else begin
      if (take) begin
        rr_q     <= pick;
        s1_valid <= 1'b1;
        s1_ts    <= hicann_event[pick].ts;
      end else if (out_ready) begin
        s1_valid <= 1'b0;
      end
    end
  end

  assign out_valid   = s1_valid;
  assign out_data    = '{dest: entry.dest, ev: '{guid: entry.guid, ts: s1_ts}};
endmodule
