// vlc_transmitter: FEC + RLL encoder of the centralized transmitter.
//
// A K-bit message is Polar encoded to an N-bit code word (polar_encoder) and
// the code word is line coded by the RLL code chosen with the RLL parameter:
// Manchester (frame of 2N bits, overall rate K/2N = 1/4 for K=128, N=256) or
// 4B6B (frame of 3N/2 bits, rate 1/3).  The two transmitter variants of the
// design differ only in this parameter.  Dimming support is not part of it.
//
// Timing: start is sampled at a clock edge together with msg; the Polar
// encoder needs log2(N)+1 cycles, then the line-coded frame is registered and
// done is high for one cycle with frame valid: done comes log2(N)+2 cycles
// after the start cycle (10 for N = 256).  frame holds until the next done.
// busy is high from the edge that takes start until done.
module vlc_transmitter #(
  parameter int unsigned  K   = vlc_pkg::MSG_LEN,
  parameter int unsigned  N   = vlc_pkg::CW_LEN,
  parameter vlc_pkg::rll_e RLL = vlc_pkg::RLL_MANCHESTER,
  localparam int unsigned FRAME = vlc_pkg::rll_len(RLL, N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [K-1:0]     msg,
  output logic             busy,
  output logic             done,
  output logic [FRAME-1:0] frame
);

  logic             pe_busy, pe_done, done_q;
  logic [N-1:0]     cw;
  logic [FRAME-1:0] line, frame_q;

  polar_encoder #(.K(K), .N(N)) u_polar (
    .clk, .rst_n, .start, .msg,
    .busy(pe_busy), .done(pe_done), .cw
  );

  if (RLL == vlc_pkg::RLL_MANCHESTER) begin : g_man
    manchester_encoder #(.N(N)) u_rll (.din(cw), .dout(line));
  end else begin : g_4b6b
    rll4b6b_encoder #(.N(N)) u_rll (.din(cw), .dout(line));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_q <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= pe_done;
      if (pe_done) frame_q <= line;
    end
  end

  assign frame = frame_q;
  assign done  = done_q;
  assign busy  = pe_busy | pe_done;

endmodule
