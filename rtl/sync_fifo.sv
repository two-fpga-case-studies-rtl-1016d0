// sync_fifo -- small synchronous first-in first-out buffer.
//
// DEPTH words of W bits held in registers.  push writes din when not full;
// pop removes the oldest word, visible on dout whenever empty is low
// (first-word fall-through).  count gives the fill level.  Pushing when full
// or popping when empty is a usage error and is flagged by assertions.
// Used to line up per-event results that the crystal identification stages
// produce at different times.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);
  logic [W-1:0]  q [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = q[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      if (push && !full) begin
        q[wp] <= din;
        wp    <= AW'((32'(wp) + 1) % DEPTH);
      end
      if (pop && !empty) rp <= AW'((32'(rp) + 1) % DEPTH);
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");
endmodule
