// tb_boundary_link: a boundary_tx and a boundary_rx on unrelated clocks
// (transmit period 10, receive period 7). HB = 37 bits on 8 lanes gives
// frames of 5 words with a padded last word. Checks: a frame marker every 5
// transmit clocks; the received halo equals the transmitted bits after each
// change and is never a value that was not sent; a frame counter that keeps
// counting; a received halo that holds while the transmitter is disabled.
// A second receiver is fed by the testbench with a stream that breaks off
// in mid-frame and restarts, and must deliver the restarted frame.
module tb_boundary_link;
  localparam int HB = 37, LANES = 8, NW = 5;
  logic tclk = 0, rclk = 0, rst_n = 1;
  logic en;
  logic [HB-1:0] bits, halo, halo2;
  logic fclk, frame, upd, upd2;
  logic [LANES-1:0] data;
  logic [31:0] frames, frames2;
  // hand-driven stream for the second receiver
  logic gclk = 0, gframe;
  logic [LANES-1:0] gdata;
  int checks = 0, failures = 0;

  boundary_tx #(.HB(HB), .LANES(LANES)) u_tx (
    .clk(tclk), .rst_n, .en_i(en), .bits_i(bits), .tx_clk_o(fclk), .tx_data_o(data), .tx_frame_o(frame));
  boundary_rx #(.HB(HB), .LANES(LANES)) u_rx (
    .rx_clk_i(fclk), .rx_data_i(data), .rx_frame_i(frame), .clk(rclk), .rst_n,
    .halo_o(halo), .upd_o(upd), .frames_o(frames));
  boundary_rx #(.HB(HB), .LANES(LANES)) u_rx2 (
    .rx_clk_i(gclk), .rx_data_i(gdata), .rx_frame_i(gframe), .clk(rclk), .rst_n,
    .halo_o(halo2), .upd_o(upd2), .frames_o(frames2));

  // Reset falls at 1 ns, before any clock edge, so every flop of both
  // clock domains sees it, including the receiver fed only by the testbench.
  initial #1 rst_n = 0;
  always #5 tclk = ~tclk;
  always #3.5 rclk = ~rclk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Frame marker spacing on the transmit side.
  int last_frame_cyc = -1, tcyc = 0, bad_spacing = 0, nframes_tx = 0;
  always @(posedge tclk) begin
    tcyc++;
    if (frame && en) begin
      if (last_frame_cyc >= 0 && tcyc - last_frame_cyc != NW) bad_spacing++;
      last_frame_cyc = tcyc;
      nframes_tx++;
    end
  end

  // Every value the receiver shows must be one of the values sent.
  logic [HB-1:0] sent [$];
  int bogus = 0;
  always @(posedge rclk) if (upd) begin
    bit found;
    found = 0;
    foreach (sent[i]) if (sent[i] == halo) found = 1;
    if (!found) begin bogus++; $display("unexpected halo %h at %0t", halo, $time); end
  end

  task automatic send_frame_words(logic [NW*LANES-1:0] v, int nwords);
    for (int w = 0; w < nwords; w++) begin
      gdata = v[w*LANES +: LANES];
      gframe = (w == 0);
      #4 gclk = 1; #4 gclk = 0;
    end
    gframe = 0;
  endtask

  initial begin
    logic [HB-1:0] v;
    en = 0; bits = '0; gframe = 0; gdata = '0;
    sent.push_back('0);
    repeat (3) @(posedge tclk);
    rst_n = 1;
    en = 1;
    for (int t = 0; t < 8; t++) begin
      v = HB'({$urandom, $urandom});
      @(negedge tclk);
      bits = v;
      sent.push_back(v);
      repeat (4 * NW) @(posedge tclk);
      #1;
      check(halo == v, $sformatf("halo after change %0d", t));
    end
    check(bad_spacing == 0 && nframes_tx > 30, $sformatf("frame spacing (%0d frames)", nframes_tx));
    check(frames > 30, $sformatf("frames received %0d", frames));
    check(bogus == 0, "only transmitted values received");
    // transmitter disabled: halo holds, no new frames
    en = 0;
    v = halo;
    @(negedge tclk);
    bits = ~bits;
    repeat (3 * NW) @(posedge tclk);
    begin
      int f0;
      f0 = frames;
      repeat (6 * NW) @(posedge tclk);
      check(frames == f0 && halo == v, "hold while link idle");
    end
    // second receiver: a broken frame followed by a full one
    send_frame_words(40'hAA_BBCC_DDEE, 2);
    send_frame_words(40'h1F_2233_4455, NW);
    repeat (6) @(posedge rclk);
    #1;
    check(halo2 == 37'h1F_2233_4455, $sformatf("resync after broken frame %h", halo2));
    check(frames2 == 1, $sformatf("broken frame not delivered (%0d frames)", frames2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
