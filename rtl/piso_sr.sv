// piso_sr: loop parallel-in serial-out shift register of one TX front-end.
//
// Runs on sr_clk, the front-end bit clock.  It sends its W-bit frame one bit
// per sr_clk, bit 0 first, on tx, and when the frame has been sent it sends
// it again, so a beacon repeats its ID without any further work from the
// rest of the chip.  A new frame is announced by a change of req_tgl (from
// the fe_reg in the sys_clk domain), synchronised with two flip-flops.  It is
// loaded from din at the next frame boundary, so a frame on the line is never
// cut short, or at once if nothing has been loaded since reset.  After
// loading, ack_tgl is set equal to the consumed req_tgl.
//
// tx is 0 (LED off in on-off keying) until the first frame is loaded.
// frame_start is high while bit 0 of a frame is on the line.
// The loop shift register follows the design description; loading at the
// frame boundary and the idle level are this design's choices.
module piso_sr #(
  parameter int unsigned W = vlc_pkg::rll_len(vlc_pkg::RLL_MANCHESTER, vlc_pkg::CW_LEN),
  localparam int unsigned CW = $clog2(W)
) (
  input  logic         sr_clk,
  input  logic         rst_n,       // synchronous to sr_clk when released
  input  logic [W-1:0] din,
  input  logic         req_tgl,     // from the sys_clk domain
  output logic         ack_tgl,
  output logic         tx,
  output logic         frame_start,
  output logic         loaded
);

  logic [W-1:0]  sh_q;
  logic [CW-1:0] cnt_q;
  logic [1:0]    req_sync;
  logic          pending, take;

  assign pending = req_sync[1] ^ ack_tgl;
  assign take    = pending && (!loaded || cnt_q == CW'(W - 1));

  always_ff @(posedge sr_clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q     <= '0;
      cnt_q    <= '0;
      req_sync <= '0;
      ack_tgl  <= 1'b0;
      loaded   <= 1'b0;
    end else begin
      req_sync <= {req_sync[0], req_tgl};
      if (take) begin
        sh_q    <= din;
        cnt_q   <= '0;
        loaded  <= 1'b1;
        ack_tgl <= req_sync[1];
      end else if (loaded) begin
        sh_q  <= {sh_q[0], sh_q[W-1:1]};
        cnt_q <= (cnt_q == CW'(W - 1)) ? '0 : cnt_q + 1'b1;
      end
    end
  end

  assign tx          = loaded & sh_q[0];
  assign frame_start = loaded && (cnt_q == '0);

endmodule
