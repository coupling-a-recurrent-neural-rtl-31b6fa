// tb_flim_workloads -- the imager at its full default size (128 lanes, four
// units of 256 pixels, HIDDEN = 32, FC_HIDDEN = 16) running the kinds of
// load the published system was evaluated with.
//
// Network. A random GRU-8 (8 hidden units, read-out network of 16) is
// loaded into the 32-unit core with the weights and biases of hidden units
// 8..31 set to zero. Those units then keep h = 0 (r = z = 1/2, n = 0) and
// add nothing, so the hardware must reproduce the GRU-8 reference exactly;
// this is how a smaller model of the size study runs on the default build.
// Timestamps follow a fluorescence decay: TDC code = 200 + an exponential
// with a mean of 110 codes (5.5 ns at 50 ps per code), cut at 999 (50 ns).
//
//   capacity   every lane offers a photon in every cycle for 3700 cycles;
//              lane l feeds unit l mod 4, so the serializer hands each unit
//              a photon every 4th cycle. A unit is ready again 37 cycles
//              (HIDDEN + 5) after an accept, so it must accept one photon
//              every 40 cycles (37 rounded up to the offer grid), and the
//              four together at least 4 Mphoton/s at 160 MHz.
//   frame A    random photons at 4 Mphoton/s in total (probability 1/40
//              per cycle), two thirds of them on four bright "bead" pixels,
//              one per unit; the rest spread over the sensor. Bead counts
//              exceed 255 and saturate.
//   frame B    four pixels, one per unit, each receive a sample of 1024
//              timestamps spaced 40 cycles apart, so all are accepted:
//              1024 GRU steps per pixel, as in the synthetic data sets.
// After each frame all 1024 results are read and compared with the GRU-8
// reference; the read-out must end within 256 * 53 cycles plus a margin.
module tb_flim_workloads;
  import flim_pkg::*;
  import tb_flim_model_pkg::*;

  localparam int L = N_TDC;
  localparam int H = 32, F = 16, HS = 8;   // built size, model size
  localparam int NPIX = 1024;
  localparam int BEAD [4] = '{100, 356, 612, 868};

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic [L-1:0] lane_valid;
  tdc_word_t lane_word [L];
  logic frame_end;
  logic out_valid, out_ready;
  result_t out_data;
  logic [31:0] photons_accepted, photons_dropped_busy, lane_drops;
  logic [31:0] states_updated, readouts_done;
  logic [N_UNITS-1:0] readout_active;

  flim_top dut (.*);

  int checks = 0, failures = 0;
  flim_model m8, m32;
  longint st_h [NPIX][];
  int     st_c [NPIX];
  int     offs [NPIX];
  int     n_acc_seen = 0;
  int     unit_acc [N_UNITS];
  longint cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- accept monitors
  for (genvar u = 0; u < N_UNITS; u++) begin : g_mon
    always @(negedge clk) begin
      if (rst_n && dut.g_unit[u].u_cu.ph_accepted) begin
        int pix;
        pix = (u << 8) | int'(dut.ph.pixel);
        m8.gru_step(st_h[pix], longint'(dut.ph.x));
        if (st_c[pix] < 255) st_c[pix]++;
        n_acc_seen++;
        unit_acc[u]++;
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  function automatic int decay_code();
    real uni;
    int  c;
    uni = (real'($urandom_range(1000000)) + 1.0) / 1000001.0;
    c = 200 + int'(-110.0 * $ln(uni));
    return (c > 999) ? 999 : c;
  endfunction

  task automatic put_word(int lane, int pix);
    lane_valid[lane]      = 1'b1;
    lane_word[lane].pixel = 10'(pix);
    lane_word[lane].ts    = 12'(decay_code());
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  task automatic readout_and_check(string name);
    bit seen [NPIX];
    int got;
    longint t0, t_end;
    int rd0;
    foreach (seen[p]) seen[p] = 0;
    rd0 = int'(readouts_done);
    lane_valid = '0;
    repeat (60) tick();
    frame_end = 1;
    t0 = cyc;
    tick();
    frame_end = 0;
    got = 0;
    t_end = 0;
    while (got < NPIX && cyc - t0 < 40000) begin
      out_ready = 1;
      #1;
      if (out_valid && out_ready) begin
        int p;
        longint y;
        p = int'(out_data.pixel);
        y = m8.fcnn(st_h[p]);
        check(!seen[p], $sformatf("%s: pixel %0d reported once", name, p));
        seen[p] = 1;
        check(out_data.count == 8'(st_c[p]) && out_data.lifetime == fx_t'(y),
              $sformatf("%s: pixel %0d: count %0d lifetime %0d, expected %0d %0d", name, p,
                        out_data.count, out_data.lifetime, st_c[p], y));
        got++;
      end
      if (int'(readouts_done) == rd0 + N_UNITS && t_end == 0) t_end = cyc;
      tick();
    end
    check(got == NPIX, $sformatf("%s: %0d of %0d pixels reported", name, got, NPIX));
    repeat (20) tick();
    if (t_end == 0) t_end = cyc;
    check(t_end - t0 <= 256 * (H + F + 5) + 100,
          $sformatf("%s: read-out took %0d cycles", name, t_end - t0));
    $display("%s: read-out %0d cycles (%0.1f us at 160 MHz)", name, t_end - t0,
             real'(t_end - t0) / 160.0);
    for (int p = 0; p < NPIX; p++) begin
      foreach (st_h[p][j]) st_h[p][j] = 0;
      st_c[p] = 0;
    end
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int unsigned ca[$], cd[$];
    int acc0, upd0, busy0, offered, bead_sat;
    int win_acc [N_UNITS];
    longint c0;
    cfg = '0; lane_valid = '0; frame_end = 0; out_ready = 1;
    foreach (lane_word[l]) lane_word[l] = '0;
    foreach (unit_acc[u]) unit_acc[u] = 0;
    // GRU-8 model and its zero-padded 32-unit image
    m8  = new(HS, F);
    m8.randomize_weights(1200);
    m32 = new(H, F);
    for (int g = 0; g < 3; g++)
      for (int j = 0; j < HS; j++) begin
        m32.w_ih[g*H+j] = m8.w_ih[g*HS+j];
        m32.b_ih[g*H+j] = m8.b_ih[g*HS+j];
        m32.b_hh[g*H+j] = m8.b_hh[g*HS+j];
        for (int k = 0; k < HS; k++) m32.w_hh[(g*H+j)*H+k] = m8.w_hh[(g*HS+j)*HS+k];
      end
    for (int i = 0; i < F; i++) begin
      for (int k = 0; k < HS; k++) m32.w1[i*H+k] = m8.w1[i*HS+k];
      m32.b1[i] = m8.b1[i];
      m32.w2[i] = m8.w2[i];
    end
    m32.b2 = m8.b2;
    for (int p = 0; p < NPIX; p++) begin
      st_h[p] = new[HS];
      foreach (st_h[p][j]) st_h[p][j] = 0;
      st_c[p] = 0;
      offs[p] = int'($urandom_range(50));
      ca.push_back(32'(p)); cd.push_back(32'(offs[p]));
    end
    m32.cfg_list(ca, cd);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (ca[i]) begin
      tick();
      cfg.we = 1; cfg.addr = 16'(ca[i]); cfg.data = 16'(cd[i]);
    end
    tick();
    cfg.we = 0;
    repeat (300) tick();

    // capacity: every lane offers a photon in every cycle
    foreach (unit_acc[u]) unit_acc[u] = 0;
    acc0 = n_acc_seen;
    c0 = cyc;
    for (int n = 0; n < 37 * 100; n++) begin
      lane_valid = '0;
      for (int l = 0; l < L; l++) put_word(l, (l % 4) * 256 + int'($urandom_range(255)));
      tick();
    end
    win_acc = unit_acc;
    acc0 = n_acc_seen - acc0;
    c0 = cyc - c0;
    lane_valid = '0;
    repeat (60) tick();
    foreach (win_acc[u])
      check(win_acc[u] >= 3700 / 40 && win_acc[u] <= 3700 / 40 + 1,
            $sformatf("capacity: unit %0d accepted %0d photons in 3700 cycles, expected 92 or 93",
                      u, win_acc[u]));
    check(real'(acc0) * 160.0e6 / real'(c0) >= 4.0e6,
          "capacity: four units process at least 4 Mphoton/s at 160 MHz");
    $display("capacity: %0d photons in %0d cycles = %0.2f Mphoton/s at 160 MHz",
             acc0, c0, real'(acc0) * 160.0 / real'(c0));
    readout_and_check("capacity frame");

    // frame A: 4 Mphoton/s random arrivals
    acc0 = n_acc_seen; busy0 = int'(photons_dropped_busy); offered = 0;
    for (int n = 0; n < 120000; n++) begin
      lane_valid = '0;
      if ($urandom_range(39) == 0) begin
        int pix;
        pix = ($urandom_range(2) != 0) ? BEAD[$urandom_range(3)] : int'($urandom_range(NPIX-1));
        put_word(int'($urandom_range(L-1)), pix);
        offered++;
      end
      tick();
    end
    lane_valid = '0;
    repeat (60) tick();
    bead_sat = 0;
    foreach (BEAD[b]) if (st_c[BEAD[b]] == 255) bead_sat++;
    check(bead_sat == 4, "frame A: bead pixel counts saturate at 255");
    check((n_acc_seen - acc0) + (int'(photons_dropped_busy) - busy0) == offered,
          "frame A: every photon accepted or discarded as busy");
    $display("frame A: offered %0d (%0.2f Mphoton/s), accepted %0d, discarded busy %0d",
             offered, real'(offered) * 160.0 / 120000.0, n_acc_seen - acc0,
             int'(photons_dropped_busy) - busy0);
    readout_and_check("frame A");

    // frame B: 1024 timestamps on one pixel of each unit
    upd0 = int'(states_updated);
    for (int n = 0; n < 1024 * 40; n++) begin
      lane_valid = '0;
      if (n % 40 == 0) foreach (BEAD[b]) put_word(b, BEAD[b] + 5);
      tick();
    end
    lane_valid = '0;
    repeat (60) tick();
    check(int'(states_updated) - upd0 == 4 * 1024, "frame B: 1024 GRU steps on each of four pixels");
    readout_and_check("frame B");

    check(int'(photons_accepted) == n_acc_seen, "accepted counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // hidden units 8..31 of a pixel's stored state stay zero
  for (genvar u = 0; u < N_UNITS; u++) begin : g_pad
    always @(negedge clk) begin
      if (rst_n && dut.g_unit[u].u_cu.u_gru.upd_done) begin
        logic [H*DATA_W-1:0] w;
        w = dut.g_unit[u].u_cu.u_bram.mem[dut.g_unit[u].u_cu.u_gru.pix_q][H*DATA_W-1:0];
        checks++;
        if (w[H*DATA_W-1:HS*DATA_W] != '0) begin
          failures++;
          if (failures < 10) $display("FAIL: padded hidden units not zero in unit %0d", u);
        end
      end
    end
  end
endmodule
