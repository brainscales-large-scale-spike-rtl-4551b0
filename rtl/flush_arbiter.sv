// flush_arbiter: picks the most urgent of the requesting buckets. Each
// requester i presents a 15-bit timestamp key[i]; its urgency is the wrap-
// around distance key[i] - now, read as a signed number so that a deadline
// already passed is more urgent than one still ahead; the smallest distance
// wins (ties go to the lowest index). The result is a one-hot grant, zero when nothing
// requests. Purely combinational. That the arbiter selects the most urgent
// bucket follows the paper; the distance measure is this design's choice.
module flush_arbiter
  import bss_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] req,
  input  ts_t          key [N],
  input  ts_t          now,
  output logic [N-1:0] grant
);
  logic signed [TS_W-1:0] best_d, d;
  logic                found;
  logic [$clog2(N)-1:0] best_i;

  always_comb begin
    best_d = '0;
    d      = '0;
    best_i = '0;
    found  = 1'b0;
    for (int i = 0; i < N; i++) begin
      d = $signed(ts_t'(key[i] - now));
      if (req[i] && (!found || d < best_d)) begin
        best_d = d;
        best_i = ($clog2(N))'(i);
        found  = 1'b1;
      end
    end
    grant = '0;
    if (found) grant[best_i] = 1'b1;
  end
endmodule
