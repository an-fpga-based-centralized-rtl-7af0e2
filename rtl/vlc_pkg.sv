// vlc_pkg: types, constants and constant functions shared by the centralized
// VLC beacon transmitter.
//
// The sizes follow the transmitter built for 100 LED front-ends: 128-bit ID
// messages, a length-256 Polar code, and either Manchester (rate 1/4 overall)
// or 4B6B (rate 1/3 overall) run-length-limited line coding.  A write request
// on the bus is 136 bits: 1 write strobe, a 7-bit front-end address and the
// 128-bit message.
//
// Two tables that the design needs but that are not printed with it are
// generated here:
//  * The Polar frozen set.  The K information positions are the K indices
//    of largest Hamming weight (row weight of the Kronecker kernel), ties
//    broken toward the larger index.  This is a common reliability-free
//    construction; the exact set of the original hardware is not published.
//  * The 4B6B code book of IEEE 802.15.7 (PHY I), each code word has three
//    ones, so the line is DC balanced.
package vlc_pkg;

  // Sizes of the main configuration.
  localparam int unsigned NUM_FE  = 100;  // number of TX front-ends
  localparam int unsigned MSG_LEN = 128;  // uncoded message length (ML)
  localparam int unsigned CW_LEN  = 256;  // Polar code word length (CL)
  localparam int unsigned FE_AW   = 7;    // front-end address width

  // Run-length-limited code of the transmitter variant.
  typedef enum logic [0:0] {
    RLL_MANCHESTER = 1'b0,  // each code bit -> 2 line bits, rate 1/2
    RLL_4B6B       = 1'b1   // each 4 code bits -> 6 line bits, rate 2/3
  } rll_e;

  // Width of one bus write request: write strobe + address + message = 136.
  localparam int unsigned REQ_W = 1 + FE_AW + MSG_LEN;

  // Line-coded frame length for a code word of n bits.
  function automatic int unsigned rll_len(rll_e mode, int unsigned n);
    return (mode == RLL_MANCHESTER) ? 2 * n : (n / 4) * 6;
  endfunction

  function automatic int unsigned popcount32(int unsigned v);
    int unsigned c = 0;
    for (int b = 0; b < 32; b++) c += (v >> b) & 1;
    return c;
  endfunction

  // Information-bit mask of a Polar code with N positions and K message bits.
  // Bit i is 1 when position i carries a message bit, 0 when it is frozen.
  function automatic logic [4095:0] polar_info_mask(int unsigned n, int unsigned k);
    logic [4095:0] m = '0;
    int unsigned   taken = 0;
    // Walk the weights from largest down; inside one weight take the largest
    // indices first.
    for (int w = 12; w >= 0; w--) begin
      for (int i = int'(n) - 1; i >= 0; i--) begin
        if (taken < k && popcount32(i) == w) begin
          m[i]  = 1'b1;
          taken = taken + 1;
        end
      end
    end
    return m;
  endfunction

  // IEEE 802.15.7 4B6B code book; argument is {b3,b2,b1,b0}.
  function automatic logic [5:0] enc4b6b(logic [3:0] nib);
    case (nib)
      4'h0: return 6'b001110;
      4'h1: return 6'b001101;
      4'h2: return 6'b010011;
      4'h3: return 6'b010110;
      4'h4: return 6'b010101;
      4'h5: return 6'b100011;
      4'h6: return 6'b100110;
      4'h7: return 6'b100101;
      4'h8: return 6'b011001;
      4'h9: return 6'b011010;
      4'hA: return 6'b011100;
      4'hB: return 6'b110001;
      4'hC: return 6'b110010;
      4'hD: return 6'b101001;
      4'hE: return 6'b101010;
      default: return 6'b101100;
    endcase
  endfunction

endpackage
