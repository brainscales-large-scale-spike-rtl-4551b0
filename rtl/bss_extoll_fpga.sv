// bss_extoll_fpga: network communication logic of one wafer-module FPGA.
//
// Sending path: spike events from the HICANN links -> event_router (merge,
// source lookup of destination and GUID) -> input buffer (sync_fifo) ->
// bucket_manager (aggregation of events per destination in renamed buckets,
// flush by deadline, fill level or eviction) -> extoll_tx_framer (one header
// word per message) -> tx_* toward the network chip.
// Receiving path: rx_* from the network chip -> rx_distributor (unpacking,
// GUID lookup of the multicast mask) -> HICANN links.
// Host path: host-bound data -> rb_controller (ring buffer in host memory,
// remote writes, notifications both ways) -> put_* toward the network chip.
// The network chip itself, the HICANN links' serial physical layer and the
// host are outside this module; their signals are the ports.
// now is the system time in timestamp units, margin the deadline slack: a
// bucket flushes once its most urgent event is due within margin.
// The block structure follows the paper; interfaces, widths not stated there
// and the buffer depths are this design's choices (see each module).
module bss_extoll_fpga
  import bss_pkg::*;
#(
  parameter int unsigned N_LINKS   = N_HICANN,
  parameter int unsigned N_BUCKETS = 16,
  parameter int unsigned INBUF_DEPTH = 16,
  localparam int unsigned LW       = $clog2(N_LINKS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ts_t                  now,
  input  ts_t                  margin,
  // events from the HICANN links
  input  logic [N_LINKS-1:0]   hicann_in_valid,
  output logic [N_LINKS-1:0]   hicann_in_ready,
  input  hicann_event_t        hicann_in_event [N_LINKS],
  // events to the HICANN links
  output logic [N_LINKS-1:0]   hicann_out_valid,
  input  logic [N_LINKS-1:0]   hicann_out_ready,
  output net_event_t           hicann_out_event,
  // messages to / from the network chip
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output logic                 tx_sop,
  output logic                 tx_eop,
  output logic [WORD_W-1:0]    tx_data,
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  logic                 rx_sop,
  input  logic                 rx_eop,
  input  logic [WORD_W-1:0]    rx_data,
  // lookup table configuration
  input  logic                 src_cfg_we,
  input  logic [LW+ADDR_W-1:0] src_cfg_index,
  input  src_entry_t           src_cfg_entry,
  input  logic                 dst_cfg_we,
  input  guid_t                dst_cfg_guid,
  input  logic [N_LINKS-1:0]   dst_cfg_mask,
  // host-bound data and ring buffer
  input  logic                 rb_cfg_init,
  input  logic [63:0]          rb_cfg_start,
  input  logic [63:0]          rb_cfg_end,
  input  logic                 hd_valid,
  output logic                 hd_ready,
  input  logic                 hd_last,
  input  logic [WORD_W-1:0]    hd_data,
  output logic                 put_valid,
  input  logic                 put_ready,
  output logic [63:0]          put_addr,
  output logic [WORD_W-1:0]    put_data,
  output logic                 put_first,
  output logic                 put_last,
  output logic                 put_notify,
  output logic                 put_nodata,
  output logic [31:0]          put_noti_bytes,
  input  logic                 host_noti_valid,
  input  logic [31:0]          host_noti_bytes,
  output logic [31:0]          rb_fill_level,
  output logic [31:0]          rb_free_space,
  output logic [63:0]          rb_write_addr,
  output logic [31:0]          rb_space,
  output logic [$clog2(INBUF_DEPTH):0] inbuf_level,
  // status
  output logic                 map_ready,
  output logic [31:0]          stat_agg [10],
  output logic [31:0]          stat_tx_messages,
  output logic [31:0]          stat_rx_events,
  output logic [31:0]          stat_rx_multicast,
  output logic [31:0]          stat_rb [3]
);
  // ------------------------------------------------------------ send path
  logic          rt_valid, rt_ready;
  tagged_event_t rt_data;

  event_router #(.N_LINKS(N_LINKS)) u_router (
    .clk, .rst_n,
    .hicann_valid(hicann_in_valid), .hicann_ready(hicann_in_ready),
    .hicann_event(hicann_in_event),
    .cfg_we(src_cfg_we), .cfg_index(src_cfg_index), .cfg_entry(src_cfg_entry),
    .out_valid(rt_valid), .out_ready(rt_ready), .out_data(rt_data)
  );

  logic          ib_valid, ib_ready;
  logic [$bits(tagged_event_t)-1:0] ib_data;

  sync_fifo #(.WIDTH($bits(tagged_event_t)), .DEPTH(INBUF_DEPTH)) u_inbuf (
    .clk, .rst_n,
    .in_valid(rt_valid), .in_ready(rt_ready), .in_data(rt_data),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_data),
    .level(inbuf_level)
  );

  logic                         ag_valid, ag_ready, ag_first, ag_last;
  dest_t                        ag_dest;
  logic [CNT_W-1:0]             ag_total;
  logic [2:0]                   ag_count;
  logic [GROUP-1:0][SLOT_W-1:0] ag_slots;

  bucket_manager #(.N_BUCKETS(N_BUCKETS)) u_agg (
    .clk, .rst_n, .now, .margin,
    .in_valid(ib_valid), .in_ready(ib_ready), .in_data(tagged_event_t'(ib_data)),
    .out_valid(ag_valid), .out_ready(ag_ready), .out_first(ag_first),
    .out_last(ag_last), .out_dest(ag_dest), .out_total(ag_total),
    .out_count(ag_count), .out_slots(ag_slots),
    .ready(map_ready),
    .stat_events(stat_agg[0]), .stat_allocs(stat_agg[1]), .stat_evicts(stat_agg[2]),
    .stat_releases(stat_agg[3]), .stat_stall_full(stat_agg[4]),
    .stat_stall_nofree(stat_agg[5]), .stat_flush_deadline(stat_agg[6]),
    .stat_flush_full(stat_agg[7]), .stat_flush_ext(stat_agg[8]),
    .stat_overlap(stat_agg[9])
  );

  extoll_tx_framer u_framer (
    .clk, .rst_n,
    .in_valid(ag_valid), .in_ready(ag_ready), .in_first(ag_first), .in_last(ag_last),
    .in_dest(ag_dest), .in_total(ag_total), .in_count(ag_count), .in_slots(ag_slots),
    .tx_valid, .tx_ready, .tx_sop, .tx_eop, .tx_data,
    .stat_messages(stat_tx_messages)
  );

  // --------------------------------------------------------- receive path
  rx_distributor #(.N_LINKS(N_LINKS)) u_rx (
    .clk, .rst_n,
    .rx_valid, .rx_ready, .rx_sop, .rx_eop, .rx_data,
    .cfg_we(dst_cfg_we), .cfg_guid(dst_cfg_guid), .cfg_mask(dst_cfg_mask),
    .hic_valid(hicann_out_valid), .hic_ready(hicann_out_ready),
    .hic_event(hicann_out_event),
    .stat_events(stat_rx_events), .stat_multicast(stat_rx_multicast)
  );

  // ------------------------------------------------------------ host path

  rb_controller #(.ADDR_W(64), .DATA_W(WORD_W)) u_rb (
    .clk, .rst_n,
    .cfg_init(rb_cfg_init), .cfg_start(rb_cfg_start), .cfg_end(rb_cfg_end),
    .in_valid(hd_valid), .in_ready(hd_ready), .in_last(hd_last), .in_data(hd_data),
    .put_valid, .put_ready, .put_addr, .put_data, .put_first, .put_last,
    .put_notify, .put_nodata, .put_noti_bytes,
    .host_noti_valid, .host_noti_bytes,
    .write_addr(rb_write_addr), .space(rb_space),
    .fill_level(rb_fill_level), .free_space(rb_free_space),
    .stat_notifications(stat_rb[0]), .stat_wraps(stat_rb[1]),
    .stat_stall_cycles(stat_rb[2])
  );
endmodule
