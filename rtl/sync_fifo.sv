// sync_fifo: single-clock first-word-fall-through FIFO with valid/ready on
// both sides. Used as the input buffer (IN-BUF) that holds tagged events,
// destination (Dst) and payload (Pls), in front of the bucket management.
// A word is written when in_valid && in_ready and removed when
// out_valid && out_ready; both may happen in the same clock. The head word is
// visible on out_data while out_valid is high. DEPTH must be a power of two.
// The buffer is named in the paper; depth and handshake are chosen here.
module sync_fifo #(
  parameter int unsigned WIDTH = 46,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW:0]      wr_ptr, rd_ptr;
  logic             push, pop;

  assign level     = wr_ptr - rd_ptr;
  assign in_ready  = level != (PW+1)'(DEPTH);
  assign out_valid = level != '0;
  assign out_data  = mem[rd_ptr[PW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[PW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  level <= (PW+1)'(DEPTH));
endmodule
