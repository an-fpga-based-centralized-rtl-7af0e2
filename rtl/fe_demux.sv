// fe_demux: DE-MUX from the VLC Transmitter to the front-end registers.
//
// Decodes the memory-read address of the current request (sel) into one
// write enable per front-end buffer register; the encoded frame itself is
// broadcast to all registers and only the enabled one takes it.  An address
// at or above NUM_FE enables nothing.  Combinational.
module fe_demux #(
  parameter int unsigned NUM_FE = vlc_pkg::NUM_FE,
  localparam int unsigned AW    = (NUM_FE > 1) ? $clog2(NUM_FE) : 1
) (
  input  logic              we,
  input  logic [AW-1:0]     sel,
  output logic [NUM_FE-1:0] we_vec
);

  always_comb begin
    for (int i = 0; i < int'(NUM_FE); i++) begin
      we_vec[i] = we && (32'(sel) == i);
    end
  end

endmodule
