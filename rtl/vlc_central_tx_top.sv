// vlc_central_tx_top: FPGA-based centralized VLC beacon transmitter.
//
// One chip encodes the ID messages of every LED beacon in a building and
// drives all their TX front-ends, instead of one microcontroller per lamp or
// one slow shared processor.  The host (a soft processor on the same FPGA,
// outside this module) writes a 128-bit message per front-end into the
// 2-port message memory through the bus port below.  Each accepted write is
// also queued in the Requests FIFO.  The Address Pointer takes one queued
// address at a time, reads that message on the second memory port and passes
// it to the VLC Transmitter (Polar FEC + Manchester or 4B6B RLL) under the
// Controller.  The DE-MUX steers the frame to the buffer register of the
// addressed front-end, and its loop PISO shift register sends the frame,
// again and again, as on-off keying on tx_fe[i] at the sr_clk bit rate.
//
// Bus port (sys_clk): req_write with req_addr/req_data is one write request
// (1 + 7 + 128 = 136 bits); it is accepted on a sys_clk edge where req_ready
// is high (the FIFO is not full) and must otherwise be held.  req_read reads
// message word req_addr; bus_rdata is valid one cycle later.
//
// Clocks: iClock (50 MHz reference) feeds the System PLL model, which gives
// sys_clk (50 MHz) and sr_clk (100 kHz).  reset_n is asynchronous, active
// low; once the PLL is locked the sr_clk domain leaves reset, then the
// sys_clk domain, each synchronously to its own clock.
// Latency: 14 sys_clk cycles from the Address Pointer taking a request to
// the frame sitting in the front-end buffer register; one request is
// served every 14 cycles.
//
// Parameter defaults are the main configuration: 100 front-ends, ML = 128,
// CL = 256, Manchester RLL.  RLL = RLL_4B6B gives the 4B6B variant.
module vlc_central_tx_top #(
  parameter int unsigned   NUM_FE     = vlc_pkg::NUM_FE,
  parameter int unsigned   MSG_LEN    = vlc_pkg::MSG_LEN,
  parameter int unsigned   CW_LEN     = vlc_pkg::CW_LEN,
  parameter vlc_pkg::rll_e RLL        = vlc_pkg::RLL_MANCHESTER,
  parameter int unsigned   FIFO_DEPTH = 32,
  parameter int unsigned   SR_DIV     = 500,
  localparam int unsigned  AW         = (NUM_FE > 1) ? $clog2(NUM_FE) : 1,
  localparam int unsigned  FRAME      = vlc_pkg::rll_len(RLL, CW_LEN)
) (
  input  logic               iClock,
  input  logic               reset_n,
  // host bus side
  input  logic               req_write,
  input  logic [AW-1:0]      req_addr,
  input  logic [MSG_LEN-1:0] req_data,
  output logic               req_ready,
  input  logic               req_read,
  output logic [MSG_LEN-1:0] bus_rdata,
  // TX front-ends
  output logic [NUM_FE-1:0]  tx_fe,
  output logic               pll_locked
);

  logic sys_clk, sr_clk;
  logic sys_rst_n, sr_rst_n;

  system_pll #(.SR_DIV(SR_DIV)) u_pll (
    .iClock, .areset(!reset_n), .sys_clk, .sr_clk, .locked(pll_locked)
  );

  // The sr_clk domain leaves reset first; the sys_clk domain follows once it
  // sees that, so the front-end handshakes start from a reset state on both
  // sides.
  reset_sync u_rst_sr  (.clk(sr_clk),  .arst_n(reset_n && pll_locked), .rst_n_out(sr_rst_n));
  reset_sync u_rst_sys (.clk(sys_clk), .arst_n(reset_n && pll_locked && sr_rst_n),
                        .rst_n_out(sys_rst_n));

  // ---------------------------------------------------------------- memory
  logic               wr_acc;
  logic               fifo_empty, fifo_full, fifo_pop;
  logic [AW-1:0]      fifo_addr;
  logic               mem_read;
  logic [AW-1:0]      mem_addr;
  logic [MSG_LEN-1:0] mem_data;

  assign req_ready = !fifo_full && sys_rst_n;
  assign wr_acc    = req_write && req_ready;

  msg_mem #(.DEPTH(NUM_FE), .WIDTH(MSG_LEN)) u_mem (
    .clk(sys_clk),
    .a_write(wr_acc), .a_read(req_read), .a_addr(req_addr),
    .a_wdata(req_data), .a_rdata(bus_rdata),
    .b_read(mem_read), .b_addr(mem_addr), .b_rdata(mem_data)
  );

  req_fifo #(.WIDTH(AW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(sys_clk), .rst_n(sys_rst_n),
    .push(wr_acc), .wr_data(req_addr),
    .pop(fifo_pop), .rd_data(fifo_addr),
    .empty(fifo_empty), .full(fifo_full), .count()
  );

  // ------------------------------------------------------ request handling
  logic               msg_valid, tx_busy;
  logic [MSG_LEN-1:0] msg;
  logic [AW-1:0]      msg_addr;
  logic               tx_start, tx_done;
  logic [FRAME-1:0]   frame;
  logic               demux_we, stalled;
  logic [AW-1:0]      demux_sel;
  logic [NUM_FE-1:0]  fe_busy, fe_we;

  addr_pointer #(.NUM_FE(NUM_FE), .K(MSG_LEN)) u_ap (
    .clk(sys_clk), .rst_n(sys_rst_n),
    .fifo_empty, .fifo_addr, .fifo_pop,
    .tx_busy,
    .mem_read, .mem_addr, .mem_data,
    .msg_valid, .msg, .msg_addr, .busy()
  );

  controller #(.NUM_FE(NUM_FE)) u_ctrl (
    .clk(sys_clk), .rst_n(sys_rst_n),
    .msg_valid, .msg_addr, .tx_busy,
    .tx_start, .tx_done,
    .fe_busy, .demux_we, .demux_sel, .stalled
  );

  vlc_transmitter #(.K(MSG_LEN), .N(CW_LEN), .RLL(RLL)) u_tx (
    .clk(sys_clk), .rst_n(sys_rst_n),
    .start(tx_start), .msg, .busy(), .done(tx_done), .frame
  );

  fe_demux #(.NUM_FE(NUM_FE)) u_demux (.we(demux_we), .sel(demux_sel), .we_vec(fe_we));

  // ------------------------------------------------------------ front-ends
  for (genvar i = 0; i < int'(NUM_FE); i++) begin : g_fe
    logic [FRAME-1:0] buf_q;
    logic             req_tgl, ack_tgl;

    fe_reg #(.W(FRAME)) u_reg (
      .clk(sys_clk), .rst_n(sys_rst_n),
      .we(fe_we[i]), .din(frame), .dout(buf_q),
      .req_tgl, .ack_tgl, .busy(fe_busy[i])
    );

    piso_sr #(.W(FRAME)) u_piso (
      .sr_clk, .rst_n(sr_rst_n),
      .din(buf_q), .req_tgl, .ack_tgl,
      .tx(tx_fe[i]), .frame_start(), .loaded()
    );
  end

endmodule
