// manchester_encoder: Manchester run-length-limited line code.
//
// Combinational.  Code bit i becomes the line-bit pair (out[2i], out[2i+1]),
// "10" for a 1 and "01" for a 0, so out[2i] = in[i] and out[2i+1] = ~in[i].
// Line bit 0 is sent first.  This is exactly the mapping of the reference
// encoding procedure; the code doubles the length (rate 1/2).  Half of the
// outputs are plain copies of inputs, which is what the code is.
module manchester_encoder #(
  parameter int unsigned N = vlc_pkg::CW_LEN
) (
  input  logic [N-1:0]   din,
  output logic [2*N-1:0] dout
);

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      dout[2*i]     = din[i];
      dout[2*i + 1] = ~din[i];
    end
  end

endmodule
