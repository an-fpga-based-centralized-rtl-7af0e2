// tb_piso_sr: the loop PISO shift register at its default frame length (512)
// and at a short one (24).  Plays the buffer-register side of the toggle
// handshake and checks the serial stream bit by bit against a model: nothing
// before the first frame, the first frame starting three sr_clk edges after
// its toggle, the frame repeated while nothing new arrives, and a new frame
// taken only at a frame boundary (never cutting the old one), with ack_tgl
// returned.
module tb_piso_sr;
  import tb_vlc_ref_pkg::*;

  logic sr_clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int repeats = 0, reloads = 0;

  always #5 sr_clk = ~sr_clk;

  initial begin
    repeat (400000) @(posedge sr_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One checker per frame length.
  `define PISO_CHECKER(NAME, WIDTH, NFRAMES)                                         \
  logic [WIDTH-1:0] NAME``_din = '0;                                                  \
  logic NAME``_req = 0, NAME``_ack, NAME``_tx, NAME``_fs, NAME``_ld;                   \
  bit   NAME``_done = 0;                                                              \
  piso_sr #(.W(WIDTH)) NAME``_dut (.sr_clk, .rst_n, .din(NAME``_din),                 \
    .req_tgl(NAME``_req), .ack_tgl(NAME``_ack), .tx(NAME``_tx),                       \
    .frame_start(NAME``_fs), .loaded(NAME``_ld));                                     \
  initial begin : NAME``_proc                                                         \
    logic [WIDTH-1:0] cur, nxt;                                                       \
    int idx, edge_no, ann_edge, sent;                                                 \
    bit have_next;                                                                    \
    have_next = 0; sent = 0; edge_no = 0; ann_edge = 0; idx = 0;                      \
    wait (rst_n);                                                                     \
    repeat (5) begin                                                                  \
      @(negedge sr_clk); edge_no++;                                                   \
      checks++; if (NAME``_tx || NAME``_ld) failures++;                               \
    end                                                                               \
    cur = WIDTH'(rand_vec(WIDTH)); NAME``_din = cur; NAME``_req = ~NAME``_req;        \
    repeat (2) begin @(negedge sr_clk); checks++; if (NAME``_ld) failures++; end      \
    @(negedge sr_clk);                                                                \
    checks++; if (!NAME``_ld || !NAME``_fs || NAME``_ack != NAME``_req) begin         \
      failures++; $display("first load not after three edges"); end                   \
    idx = 0;                                                                          \
    while (sent < NFRAMES) begin                                                      \
      checks++;                                                                       \
      if (NAME``_tx !== cur[idx]) begin failures++; $display("bit %0d wrong", idx); end \
      if (!have_next && ($urandom % (WIDTH) == 0)) begin                              \
        nxt = WIDTH'(rand_vec(WIDTH)); NAME``_din = nxt; NAME``_req = ~NAME``_req;    \
        have_next = 1; ann_edge = edge_no;                                            \
      end                                                                             \
      @(negedge sr_clk); edge_no++;                                                   \
      idx++;                                                                          \
      if (idx == int'(WIDTH)) begin                                                   \
        idx = 0; sent++;                                                              \
        if (have_next && edge_no >= ann_edge + 3) begin                               \
          cur = nxt; have_next = 0; reloads++;                                        \
          checks++; if (NAME``_ack != NAME``_req) failures++;                         \
        end else repeats++;                                                           \
        checks++; if (!NAME``_fs) failures++;                                         \
      end else begin                                                                  \
        checks++; if (NAME``_fs) failures++;                                          \
      end                                                                             \
    end                                                                               \
    NAME``_done = 1;                                                                  \
  end

  `PISO_CHECKER(s, 24, 300)
  `PISO_CHECKER(l, 512, 12)

  initial begin
    repeat (3) @(negedge sr_clk);
    rst_n = 1;
    wait (s_done && l_done);
    checks++; if (repeats == 0) begin failures++; $display("no repeat seen"); end
    checks++; if (reloads == 0) begin failures++; $display("no reload seen"); end
    $display("frames repeated=%0d replaced=%0d", repeats, reloads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
