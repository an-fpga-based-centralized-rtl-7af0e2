// controller: Controller of the centralized transmitter.
//
// Takes a message and its front-end address from the Address Pointer, starts
// the VLC Transmitter, waits for it to finish, and then drives the DE-MUX so
// that the encoded frame is written into the buffer register of that
// front-end.  tx_busy tells the Address Pointer not to fetch another request
// meanwhile.
//
// If the buffer register of the addressed front-end still holds a frame that
// its shift register has not yet taken (fe_busy for that address), the write
// is held back (a stall) until the register is free, so no frame is lost or
// torn across the clock-domain crossing.  The stall is this design's own
// mechanism; the paper describes only start/finish and DE-MUX control.
//
// Timing: msg_valid cycle -> tx_start in the same cycle; tx_done cycle ->
// demux_we in the same cycle when no stall; tx_busy low again the cycle
// after demux_we.
module controller #(
  parameter int unsigned NUM_FE = vlc_pkg::NUM_FE,
  localparam int unsigned AW    = (NUM_FE > 1) ? $clog2(NUM_FE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the Address Pointer
  input  logic              msg_valid,
  input  logic [AW-1:0]     msg_addr,
  output logic              tx_busy,
  // VLC Transmitter
  output logic              tx_start,
  input  logic              tx_done,
  // DE-MUX and buffer registers
  input  logic [NUM_FE-1:0] fe_busy,
  output logic              demux_we,
  output logic [AW-1:0]     demux_sel,
  output logic              stalled
);

  typedef enum logic [1:0] {IDLE, RUN, STALL} state_e;

  state_e        state_q;
  logic [AW-1:0] addr_q;
  logic          target_busy;

  assign target_busy = fe_busy[addr_q];
  assign tx_start    = (state_q == IDLE) && msg_valid;
  assign tx_busy     = (state_q != IDLE);
  assign demux_sel   = addr_q;
  assign demux_we    = ((state_q == RUN) && tx_done && !target_busy)
                    || ((state_q == STALL) && !target_busy);
  assign stalled     = (state_q == STALL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      addr_q  <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (msg_valid) begin
          addr_q  <= msg_addr;
          state_q <= RUN;
        end
        RUN: if (tx_done) state_q <= target_busy ? STALL : IDLE;
        STALL: if (!target_busy) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  a_write_free: assert property (@(posedge clk) disable iff (!rst_n) demux_we |-> !fe_busy[demux_sel]);

endmodule
