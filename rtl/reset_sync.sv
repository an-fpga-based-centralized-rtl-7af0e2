// reset_sync: reset synchroniser.  rst_n_out falls at once when arst_n falls
// and rises two clk edges after arst_n rises, so every flip-flop of the clock
// domain leaves reset on the same edge.  The two flip-flops are reset
// asynchronously and clocked synchronously on purpose: that is what a reset
// synchroniser is, so the lint note about a net used both ways stands.
module reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n_out
);

  logic [1:0] sync_q;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) sync_q <= '0;
    else         sync_q <= {sync_q[0], 1'b1};
  end

  assign rst_n_out = sync_q[1];

endmodule
