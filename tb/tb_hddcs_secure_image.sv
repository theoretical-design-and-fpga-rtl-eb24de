// tb_hddcs_secure_image -- end-to-end test of the chaotic image link at full
// size (640 x 480, all parameters at their defaults).
//
// The public channel is modelled as one register stage from chan_tx to
// chan_rx. The test loads the picture into the transmitter, sends one whole
// frame and checks:
//   * monitor 1 shows the plaintext picture, pixel by pixel;
//   * every channel pixel is the plaintext XOR the reference 3D-DCS state
//     (stepped from the key with the s, u, v words carried on the channel);
//   * the receiver decrypts all 307200 pixels correctly and monitor 2 shows
//     them in order, with the same 1600-clock line period as monitor 1;
//   * "mismatched parameter" case: after a reset with a receiver key that
//     differs in one bit, at least 95 % of the decrypted pixels are wrong.
// Mechanisms counted (each must happen): frame start on the channel,
// receiver raster resync, generator holding during blanking, key mismatch.
module tb_hddcs_secure_image;
  import hddcs_pkg::*;
  import hddcs_ref_pkg::*;
  localparam int unsigned NPIX = H_ACTIVE * V_ACTIVE;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1, tx_run = 0, load_we = 0;
  logic [2:0][31:0] tx_key, rx_key;
  logic [18:0] load_addr;
  rgb_t load_data, mon1_rgb, mon2_rgb, rx_dec_pix;
  logic mon1_hs, mon1_vs, mon1_de, mon2_hs, mon2_vs, mon2_de, rx_dec_valid, rx_dec_sof;
  chan_t chan_tx, chan_rx;

  hddcs_secure_image dut (.clk, .rst, .tx_run, .tx_key, .load_we, .load_addr, .load_data,
    .mon1_rgb, .mon1_hs, .mon1_vs, .mon1_de, .chan_tx,
    .rx_key, .chan_rx, .rx_dec_valid, .rx_dec_sof, .rx_dec_pix,
    .mon2_rgb, .mon2_hs, .mon2_vs, .mon2_de);

  // public channel: one clock of delay
  always_ff @(posedge clk) chan_rx <= rst ? '0 : chan_tx;

  always #10 clk = !clk;

  int unsigned cyc = 0, n_tx = 0, n_dec = 0, n_bad = 0, n_m1 = 0, n_m2 = 0, n_same = 0;
  int unsigned n_sof = 0, n_resync = 0, n_hold = 0, n_mismatch = 0, hs2_fall = 0;
  logic mismatch_run = 0, rx_locked = 0, hs2_d = 1;
  state_t st;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("cycle %0d: %s", cyc, s);
  endtask

  function automatic rgb_t pic(int unsigned p);
    return test_pixel(p % H_ACTIVE, p / H_ACTIVE);
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst) begin
      st.x = tx_key[0]; st.y = tx_key[1]; st.z = tx_key[2];
    end else begin
      // transmitter side: channel contents against the reference model
      if (chan_tx.valid) begin
        state_t nx;
        nx = ref_step(st, chan_tx.prng[0], chan_tx.prng[1], chan_tx.prng[2]);
        if (!mismatch_run) begin
          checks++;
          if (chan_tx.pix != ref_xor(pic(n_tx % NPIX), nx)) fail($sformatf("cipher pixel %0d", n_tx));
          if (chan_tx.pix == pic(n_tx % NPIX)) n_same++;
        end
        if (chan_tx.sof) n_sof++;
        st = nx;
        n_tx++;
      end else if (tx_run && dut.u_board1.pix_valid == 1'b0) n_hold++;
      if (mon1_de && dut.u_board1.u_vga.pix_ce && !mismatch_run) begin
        checks++;
        if (mon1_rgb != pic(n_m1 % NPIX)) fail($sformatf("monitor 1 pixel %0d", n_m1));
        n_m1++;
      end
      // receiver side
      if (rx_dec_valid) begin
        if (rx_dec_pix != pic(n_dec % NPIX)) n_bad++;
        if (!mismatch_run) begin
          checks++;
          if (rx_dec_pix != pic(n_dec % NPIX)) fail($sformatf("decrypted pixel %0d got %h", n_dec, rx_dec_pix));
        end
        n_dec++;
      end
      if (rx_locked && mon2_de && dut.u_board2.u_vga.pix_ce && !mismatch_run) begin
        checks++;
        if (mon2_rgb != pic(n_m2 % NPIX)) fail($sformatf("monitor 2 pixel %0d got %h", n_m2, mon2_rgb));
        n_m2++;
      end
      if (rx_locked && !mismatch_run && hs2_d && !mon2_hs) begin
        if (hs2_fall != 0) begin
          checks++;
          if (cyc - hs2_fall != 1600) fail($sformatf("monitor 2 line period %0d", cyc - hs2_fall));
        end
        hs2_fall = cyc;
      end
      hs2_d = mon2_hs;
      if (chan_rx.valid && chan_rx.sof) begin
        n_resync++;
        rx_locked = 1;
      end
    end
  end

  initial begin
    repeat (1_400_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tx_key = {32'h2468_ACE0, 32'h1357_9BDF, 32'h0F1E_2D3C};
    rx_key = tx_key;
    load_addr = '0; load_data = '0;
    chan_rx = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    load_we = 1;
    for (int unsigned a = 0; a < NPIX; a++) begin
      load_addr = 19'(a); load_data = pic(a);
      @(negedge clk);
    end
    load_we = 0;
    tx_run = 1;
    wait (n_dec == NPIX);
    repeat (20) @(negedge clk);
    checks++;
    if (n_tx != NPIX || n_m1 != NPIX || n_m2 != NPIX)
      fail($sformatf("sent %0d shown %0d / %0d", n_tx, n_m1, n_m2));
    checks++;
    if (n_same > NPIX / 50) fail($sformatf("%0d cipher pixels equal the plaintext", n_same));
    $display("matched keys: %0d pixels sent, %0d decrypted, %0d wrong", n_tx, n_dec, n_bad);
    // mismatched parameter: one bit of the receiver's x^0 flipped
    tx_run = 0; rst = 1; mismatch_run = 1;
    rx_key[0][5] = !rx_key[0][5];
    repeat (2) @(negedge clk);
    rst = 0; n_dec = 0; n_bad = 0; n_tx = 0;
    tx_run = 1;
    wait (n_dec == 20 * H_ACTIVE);
    n_mismatch++;
    checks++;
    if (n_bad < (n_dec * 95) / 100) fail($sformatf("wrong key: only %0d of %0d pixels wrong", n_bad, n_dec));
    $display("mismatched key: %0d of %0d pixels wrong", n_bad, n_dec);
    $display("mechanisms: frame starts %0d, receiver resyncs %0d, hold cycles %0d, key mismatch runs %0d",
             n_sof, n_resync, n_hold, n_mismatch);
    checks++; if (n_sof == 0) fail("no frame start");
    checks++; if (n_resync == 0) fail("no receiver resync");
    checks++; if (n_hold == 0) fail("generator never held");
    checks++; if (n_mismatch == 0) fail("no key mismatch run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
