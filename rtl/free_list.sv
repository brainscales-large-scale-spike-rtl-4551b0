// free_list: the list of buckets not assigned to any destination. It is a
// circular queue of bucket numbers that holds 0..N-1 after reset. head_id is
// the next free bucket (valid while nonempty); pop removes it, push returns a
// released bucket. Pop and push may happen in the same clock.
// The paper names the list; its organisation as a queue is chosen here.
module free_list #(
  parameter int unsigned N = 16,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pop,
  output logic [IW-1:0] head_id,
  output logic          nonempty,
  input  logic          push,
  input  logic [IW-1:0] push_id,
  output logic [IW:0]   count
);
  logic [IW-1:0] ids [N];
  logic [IW-1:0] rd_ptr, wr_ptr;

  assign head_id  = ids[rd_ptr];
  assign nonempty = count != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) ids[i] <= IW'(i);
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= (IW+1)'(N);
    end else begin
      if (push) begin
        ids[wr_ptr] <= push_id;
        wr_ptr      <= (wr_ptr == IW'(N-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop && nonempty)
        rd_ptr <= (rd_ptr == IW'(N-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (IW+1)'(push) - (IW+1)'(pop && nonempty);
    end
  end

  a_no_pop_empty : assert property (@(posedge clk) disable iff (!rst_n) pop |-> nonempty);
  a_no_overfill  : assert property (@(posedge clk) disable iff (!rst_n)
                                    push |-> (count < (IW+1)'(N) || pop));
endmodule
