// addr_pointer: Address Pointer of the centralized transmitter.
//
// When the transmitter is not busy and the Requests FIFO holds a request, the
// Address Pointer takes that request (one front-end address), issues a read
// of that address on port B of the message memory, captures the returned
// message and hands message and address to the Controller.
//
// States and timing (one sys_clk cycle each):
//   IDLE : fifo_pop is high if the FIFO is not empty and tx_busy is low;
//          the address is registered.
//   READ : mem_read / mem_addr are driven to the message memory.
//   CATCH: the memory returns mem_data; it is registered.
//   SEND : msg_valid is high for one cycle with msg / msg_addr.
// The Controller raises tx_busy on the edge that ends SEND, so a new request
// is taken no sooner than the message before it has been delivered.  The
// state split is this design's choice; the paper gives the order of events.
module addr_pointer #(
  parameter int unsigned NUM_FE = vlc_pkg::NUM_FE,
  parameter int unsigned K      = vlc_pkg::MSG_LEN,
  localparam int unsigned AW    = (NUM_FE > 1) ? $clog2(NUM_FE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // Requests FIFO
  input  logic          fifo_empty,
  input  logic [AW-1:0] fifo_addr,
  output logic          fifo_pop,
  // status of the VLC transmitter path (from the Controller)
  input  logic          tx_busy,
  // message memory, port B
  output logic          mem_read,
  output logic [AW-1:0] mem_addr,
  input  logic [K-1:0]  mem_data,
  // to the Controller / VLC Transmitter
  output logic          msg_valid,
  output logic [K-1:0]  msg,
  output logic [AW-1:0] msg_addr,
  output logic          busy
);

  typedef enum logic [1:0] {IDLE, READ, CATCH, SEND} state_e;

  state_e        state_q;
  logic [AW-1:0] addr_q;
  logic [K-1:0]  msg_q;

  assign fifo_pop  = (state_q == IDLE) && !fifo_empty && !tx_busy;
  assign mem_read  = (state_q == READ);
  assign mem_addr  = addr_q;
  assign msg_valid = (state_q == SEND);
  assign msg       = msg_q;
  assign msg_addr  = addr_q;
  assign busy      = (state_q != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= IDLE;
      addr_q  <= '0;
      msg_q   <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (fifo_pop) begin
          addr_q  <= fifo_addr;
          state_q <= READ;
        end
        READ:  state_q <= CATCH;
        CATCH: begin
          msg_q   <= mem_data;
          state_q <= SEND;
        end
        SEND:  state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
