// polar_encoder: multi-cycle Polar encoder (K message bits -> N code bits).
//
// On start the K message bits are placed, in order, on the information
// positions of the length-N input vector u and all frozen positions are set
// to 0.  The n = log2(N) butterfly stages of the Polar transform are then
// applied one per clock, in the order of the reference procedure: stage s
// works on blocks of b = N/2^s positions and, for the first half of each
// block, does u[p] ^= u[p + b/2].  The result is the natural-order code word
// x = u * F^(kron n), F = [1 0; 1 1] (no bit reversal).
//
// Timing: start is sampled at a clock edge; n clock edges later the code word
// is final and done is high for one cycle (so done comes n+1 cycles after the
// start cycle).  cw holds until the next start.  busy is high from the edge
// that takes start until done.  start while busy is ignored.
//
// The frozen set is generated by vlc_pkg::polar_info_mask (row-weight rule);
// the published design does not list its frozen set.  The one-stage-per-cycle
// schedule is this design's choice.
module polar_encoder #(
  parameter int unsigned K = vlc_pkg::MSG_LEN,
  parameter int unsigned N = vlc_pkg::CW_LEN,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned SW   = (LOGN > 1) ? $clog2(LOGN) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [K-1:0] msg,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] cw
);

  localparam logic [4095:0] INFO_MASK = vlc_pkg::polar_info_mask(N, K);

  logic [N-1:0]  u_q, u_ins, u_stage;
  logic [SW-1:0] stage_q;
  logic          run_q, done_q;

  // Frozen-bit insertion: message bits fill the information positions in
  // increasing index order.
  always_comb begin
    int unsigned bi;
    bi    = 0;
    u_ins = '0;
    for (int c = 0; c < int'(N); c++) begin
      if (INFO_MASK[c]) begin
        u_ins[c] = msg[bi];
        bi       = bi + 1;
      end
    end
  end

  // One butterfly stage; half = N >> (stage + 1).
  always_comb begin
    int unsigned half;
    half    = N >> (32'(stage_q) + 1);
    u_stage = u_q;
    for (int p = 0; p < int'(N); p++) begin
      if ((p & half) == 0) u_stage[p] = u_q[p] ^ u_q[p | half];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_q     <= '0;
      stage_q <= '0;
      run_q   <= 1'b0;
      done_q  <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (run_q) begin
        u_q <= u_stage;
        if (stage_q == SW'(LOGN - 1)) begin
          run_q  <= 1'b0;
          done_q <= 1'b1;
        end else begin
          stage_q <= stage_q + 1'b1;
        end
      end else if (start) begin
        u_q     <= u_ins;
        stage_q <= '0;
        run_q   <= 1'b1;
      end
    end
  end

  assign cw   = u_q;
  assign done = done_q;
  assign busy = run_q;

endmodule
