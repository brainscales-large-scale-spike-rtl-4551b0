// rb_controller: FPGA side of the ring-buffer transfer to host memory.
//
// The host reserves a ring between Start-Address (inclusive) and End-Address
// (exclusive). The FPGA writes data into it with remote memory writes (puts)
// and never waits for a per-write handshake. Instead both sides exchange
// notifications: each put burst ends with a notification to the host that
// says how many bytes were written, and the host sends a notification back
// when it has processed data, giving that many bytes of the ring back. This
// is credit-based flow control with the free ring space as the credit.
// State: Write-Address (next byte to write), Space = End - Start,
// Filling-Level = bytes written and not yet released by the host, and
// Free-Space = Space - Filling-Level. A word is written only if a full word of
// Free-Space remains; otherwise in_ready is low (the source stalls).
// A burst (one put) is at most BURST_WORDS words (31 x 16 B = 496 B, one
// maximum payload). It ends early at the ring's end, which wraps
// Write-Address to Start, when free space runs out, or when the source marks
// in_last. Its last word carries put_notify and put_noti_bytes. If the source
// pauses for IDLE_CLOSE clocks inside a burst, the burst is closed with a
// notification-only put (put_nodata high, no data word) so that the host is
// not left waiting for data that is already in its memory.
// Interface: cfg_init (re)loads the ring; in_* is the host-bound data
// stream; put_* is one word per clock toward the network with its host
// address; host_noti_valid/host_noti_bytes return credits.
// From the paper: write pointer and space registers in the FPGA, the ring in
// host memory, notifications both ways as credit-based flow control. This
// design's choices: word size, burst rule, notification per burst, alignment
// (Start and End must be multiples of WORD_BYTES).
module rb_controller #(
  parameter int unsigned ADDR_W      = 64,
  parameter int unsigned DATA_W      = 128,
  parameter int unsigned BURST_WORDS = 31,
  parameter int unsigned IDLE_CLOSE  = 16,
  localparam int unsigned WORD_BYTES = DATA_W / 8,
  localparam int unsigned BW         = $clog2(BURST_WORDS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_init,
  input  logic [ADDR_W-1:0] cfg_start,
  input  logic [ADDR_W-1:0] cfg_end,
  // host-bound data
  input  logic              in_valid,
  output logic              in_ready,
  input  logic              in_last,
  input  logic [DATA_W-1:0] in_data,
  // remote writes into host memory
  output logic              put_valid,
  input  logic              put_ready,
  output logic [ADDR_W-1:0] put_addr,
  output logic [DATA_W-1:0] put_data,
  output logic              put_first,
  output logic              put_last,
  output logic              put_notify,
  output logic              put_nodata,
  output logic [31:0]       put_noti_bytes,
  // notifications from the host: bytes processed
  input  logic              host_noti_valid,
  input  logic [31:0]       host_noti_bytes,
  // state
  output logic [ADDR_W-1:0] write_addr,
  output logic [31:0]       space,
  output logic [31:0]       fill_level,
  output logic [31:0]       free_space,
  output logic [31:0]       stat_notifications,
  output logic [31:0]       stat_wraps,
  output logic [31:0]       stat_stall_cycles
);
  logic [ADDR_W-1:0] start_q, end_q, wa_q;
  logic [31:0]       fill_q;
  logic [BW-1:0]     burst_q;
  logic              fire, wrap, room_after;
  logic [31:0]       fill_add, fill_sub;
  logic [$clog2(IDLE_CLOSE+1)-1:0] idle_q;
  logic              close;

  assign write_addr = wa_q;
  assign space      = 32'(end_q - start_q);
  assign fill_level = fill_q;
  assign free_space = space - fill_q;

  // close an open burst after IDLE_CLOSE clocks without input
  assign close      = burst_q != '0 && idle_q == ($clog2(IDLE_CLOSE+1))'(IDLE_CLOSE);
  assign in_ready   = put_ready && free_space >= 32'(WORD_BYTES) && !close;
  assign put_valid  = close || (in_valid && free_space >= 32'(WORD_BYTES));
  assign put_nodata = close;
  assign fire       = put_valid && put_ready && !close;
  assign put_addr   = wa_q;
  assign put_data   = in_data;
  assign put_first  = burst_q == '0;
  assign wrap       = wa_q + ADDR_W'(WORD_BYTES) >= end_q;
  // space for another word once this one and any credit now arriving count
  assign fill_sub   = host_noti_valid ? host_noti_bytes : '0;
  assign fill_add   = fire ? 32'(WORD_BYTES) : '0;
  assign room_after = free_space + fill_sub >= 32'(2 * WORD_BYTES);
  assign put_last   = close || in_last || wrap || !room_after || burst_q == BW'(BURST_WORDS - 1);
  assign put_notify = put_last;
  assign put_noti_bytes = 32'(burst_q + BW'(!close)) * 32'(WORD_BYTES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q            <= '0;
      end_q              <= '0;
      wa_q               <= '0;
      fill_q             <= '0;
      burst_q            <= '0;
      idle_q             <= '0;
      stat_notifications <= '0;
      stat_wraps         <= '0;
      stat_stall_cycles  <= '0;
    end else if (cfg_init) begin
      start_q <= cfg_start;
      end_q   <= cfg_end;
      wa_q    <= cfg_start;
      fill_q  <= '0;
      burst_q <= '0;
    end else begin
      fill_q <= fill_q + fill_add - fill_sub;
      if (close && put_ready) begin
        burst_q            <= '0;
        stat_notifications <= stat_notifications + 1;
      end
      if (in_valid || burst_q == '0) idle_q <= '0;
      else if (!close)              idle_q <= idle_q + 1'b1;
      if (fire) begin
        wa_q    <= wrap ? start_q : wa_q + ADDR_W'(WORD_BYTES);
        burst_q <= put_last ? '0 : burst_q + 1'b1;
        if (put_last) stat_notifications <= stat_notifications + 1;
        if (wrap)     stat_wraps <= stat_wraps + 1;
      end
      if (in_valid && free_space < 32'(WORD_BYTES)) stat_stall_cycles <= stat_stall_cycles + 1;
    end
  end

  a_credit_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      host_noti_valid |-> host_noti_bytes <= fill_q + fill_add);
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) fill_q <= space);
endmodule
