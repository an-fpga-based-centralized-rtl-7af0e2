// rll4b6b_encoder: 4B6B run-length-limited line code.
//
// Combinational.  Each nibble {in[4j+3], in[4j+2], in[4j+1], in[4j]} is
// looked up in the IEEE 802.15.7 4B6B code book and the 6-bit code word is
// placed on out[6j+5 : 6j], as in the reference encoding procedure.  Every
// code word holds three ones and three zeros (DC balanced), rate 2/3.  The
// code book itself is not printed with the design; the standard one is used.
module rll4b6b_encoder #(
  parameter int unsigned N = vlc_pkg::CW_LEN  // multiple of 4
) (
  input  logic [N-1:0]       din,
  output logic [N/4*6-1:0]   dout
);

  always_comb begin
    for (int j = 0; j < int'(N / 4); j++) begin
      dout[6*j +: 6] = vlc_pkg::enc4b6b(din[4*j +: 4]);
    end
  end

endmodule
