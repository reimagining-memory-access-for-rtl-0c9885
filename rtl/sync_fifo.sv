// sync_fifo: small synchronous FIFO (first word fall-through) used as the
// memory read-response buffer of a lane. push has no ready: the lane only
// issues a read when a slot is reserved for its response (credit counting),
// and an assertion checks that no push reaches a full FIFO.
// Lint note: rst_n is seen both as the asynchronous reset of the pointers and
// in the overflow assertion's disable condition; the latter is verification
// only and adds no logic.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic         valid,
  output logic [W-1:0] data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;

  assign valid = (cnt != '0);
  assign data  = mem[rp];

  always_ff @(posedge clk)
    if (push) mem[wp] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp  <= '0;
      wp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop && valid) rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop && valid);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (cnt < (AW+1)'(DEPTH) || pop));
endmodule
