// fe_reg: buffering register between the DE-MUX and one PISO shift register.
//
// Lives in the sys_clk domain.  On we it stores the encoded frame and flips
// req_tgl, which tells the front-end's shift register (sr_clk domain) that a
// new frame is waiting.  The shift register returns the toggle value it has
// consumed on ack_tgl; that is synchronised here with two flip-flops.  While
// req_tgl and the synchronised ack differ, busy is high and the frame must
// stay unchanged (the Controller then holds back new writes), so dout is a
// stable bundle whenever the other domain samples it.
//
// The register stage follows the design description; the toggle handshake is
// this design's way of crossing into the slow front-end clock.
module fe_reg #(
  parameter int unsigned W = vlc_pkg::rll_len(vlc_pkg::RLL_MANCHESTER, vlc_pkg::CW_LEN)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         we,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout,
  output logic         req_tgl,
  input  logic         ack_tgl,   // from the sr_clk domain
  output logic         busy
);

  logic [1:0] ack_sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout     <= '0;
      req_tgl  <= 1'b0;
      ack_sync <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack_tgl};
      if (we) begin
        dout    <= din;
        req_tgl <= ~req_tgl;
      end
    end
  end

  assign busy = req_tgl ^ ack_sync[1];

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) we |-> !busy);

endmodule
