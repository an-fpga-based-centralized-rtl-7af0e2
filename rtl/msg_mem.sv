// msg_mem: 2-port on-chip message memory.
//
// Holds the uncoded ID message of every LED front-end, one word per
// front-end (100 x 128 bits = 1600 bytes in the main configuration).  Port A
// belongs to the processor bus: the host writes new messages there and may
// read them back.  Port B is read-only and belongs to the Address Pointer of
// the transmitter.  Both ports are synchronous to sys_clk; a read returns its
// word on the clock edge after the read strobe (one cycle latency) and the
// output holds until the next read.  A port-B read of a word written on the
// same edge returns the old word.
//
// The two-port organisation, the word size and the depth follow the design
// description; read latency and read-during-write behaviour are choices of
// this implementation (a plain FPGA block RAM).
module msg_mem #(
  parameter int unsigned DEPTH = vlc_pkg::NUM_FE,
  parameter int unsigned WIDTH = vlc_pkg::MSG_LEN,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // port A: bus side
  input  logic             a_write,
  input  logic             a_read,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B: transmitter side
  input  logic             b_read,
  input  logic [AW-1:0]    b_addr,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_write && (32'(a_addr) < DEPTH)) mem[a_addr] <= a_wdata;
  end

  always_ff @(posedge clk) begin
    if (a_read) a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_read) b_rdata <= mem[b_addr];
  end

endmodule
