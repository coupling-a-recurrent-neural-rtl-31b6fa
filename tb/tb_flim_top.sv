// tb_flim_top -- end-to-end test of the lifetime imager at its full default
// size: 128 TDC lanes, four computation units of 256 pixels, GRU with 32
// hidden units, read-out network with 16.
//
// Random network coefficients and per-pixel offsets are loaded over the
// cfg bus. Two integration periods are run:
//   frame 1  dense random traffic on all lanes (lane registers overflow,
//            units are found busy), then one pixel receives 260 photons
//            spaced so that all are accepted (its count saturates at 255);
//   frame 2  sparse traffic, so most pixels report no photon.
// Photons are also offered during each read-out and must be discarded.
// Monitors record the photons each unit accepts; each must be one that
// was driven, with the corrected input x computed here from its code,
// offset and gain. A per-pixel reference GRU follows the accepted photons,
// and after each frame_end all 1024 results {pixel, count, lifetime} are
// read with random back-pressure and compared with the reference read-out
// network. Conservation is checked: every driven word is accepted,
// discarded at a busy unit or dropped at a full lane register. Every
// mechanism (lane overflow, busy discard, read-out discard, count
// saturation, output back-pressure, two frames) must occur at least once.
module tb_flim_top;
  import flim_pkg::*;
  import tb_flim_model_pkg::*;

  localparam int L = N_TDC;
  localparam int H = 32, F = 16;
  localparam int NPIX = 1024;

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
  flim_model m;
  longint st_h [NPIX][];
  int     st_c [NPIX];
  int     offs [NPIX];
  int     driven [int];          // key {pixel, x} -> words driven and not yet accepted
  int     n_driven = 0, n_acc_seen = 0, n_ro_offered = 0;
  int     n_backpressure = 0, n_sat = 0, n_frames = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int key(int pix, int x);
    return (pix << 16) | (x & 16'hFFFF);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- accept monitors
  // sampled mid-cycle: what the next rising edge hands to each GRU core
  for (genvar u = 0; u < N_UNITS; u++) begin : g_mon
    always @(negedge clk) begin
      if (rst_n && dut.g_unit[u].u_cu.ph_accepted) begin
        int pix, x, k;
        pix = (u << 8) | int'(dut.ph.pixel);
        x   = int'(dut.ph.x);
        k   = key(pix, x);
        checks++;
        if (driven.exists(k) && driven[k] > 0) driven[k]--;
        else begin
          failures++;
          if (failures < 10) $display("FAIL: accepted photon pixel %0d x %0d was not driven", pix, x);
        end
        m.gru_step(st_h[pix], longint'(x));
        if (st_c[pix] < 255) st_c[pix]++;
        n_acc_seen++;
      end
    end
  end

  // ---------------------------------------------------------------- stimulus helpers
  task automatic put_word(int lane, int pix);
    int ts, c, x, k;
    ts = int'($urandom_range(4095));
    c  = (ts > offs[pix]) ? ts - offs[pix] : 0;
    x  = (c * 1024) >>> 8;                     // default gain 4.0
    if (x > 32767) x = 32767;
    k  = key(pix, x);
    if (driven.exists(k)) driven[k]++; else driven[k] = 1;
    lane_valid[lane]      = 1'b1;
    lane_word[lane].pixel = 10'(pix);
    lane_word[lane].ts    = 12'(ts);
    n_driven++;
  endtask

  // one cycle of random traffic; pixels drawn from [lo, hi]
  task automatic random_cycle(int permille, int lo, int hi, int first_lane);
    lane_valid = '0;
    for (int l = first_lane; l < L; l++)
      if (int'($urandom_range(999)) < permille) put_word(l, int'($urandom_range(hi - lo)) + lo);
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  // end the frame and check all 1024 results; photons offered meanwhile
  task automatic readout_and_check();
    bit seen [NPIX];
    int got, ro_cycles;
    int acc_before;
    foreach (seen[p]) seen[p] = 0;
    lane_valid = '0;
    repeat (60) tick();                         // let the last photons finish
    frame_end = 1;
    tick();
    frame_end = 0;
    repeat (50) tick();
    acc_before = n_acc_seen;
    got = 0; ro_cycles = 0;
    while (got < NPIX && ro_cycles < 100000) begin
      // photons offered during the read-out
      lane_valid = '0;
      if (readout_active == '1 && got < NPIX / 2 && int'($urandom_range(19)) == 0) begin
        put_word(int'($urandom_range(L-1)), int'($urandom_range(NPIX-1)));
        n_ro_offered++;
      end
      out_ready = 1'($urandom_range(3) != 0);
      #1;
      if (out_valid && !out_ready) n_backpressure++;
      if (out_valid && out_ready) begin
        int p;
        longint y;
        p = int'(out_data.pixel);
        y = m.fcnn(st_h[p]);
        check(!seen[p], $sformatf("pixel %0d reported once", p));
        seen[p] = 1;
        check(out_data.count == 8'(st_c[p]) && out_data.lifetime == fx_t'(y),
              $sformatf("pixel %0d: count %0d lifetime %0d, expected %0d %0d", p,
                        out_data.count, out_data.lifetime, st_c[p], y));
        got++;
      end
      tick();
      ro_cycles++;
    end
    lane_valid = '0;
    out_ready = 1;
    check(got == NPIX, $sformatf("%0d of %0d pixels reported", got, NPIX));
    check(n_acc_seen == acc_before, "no photon accepted during read-out");
    repeat (10) tick();
    check(readout_active == 0, "read-out finished");
    foreach (st_c[p]) if (st_c[p] == 255) n_sat++;
    // the next integration starts from the zero state
    for (int p = 0; p < NPIX; p++) begin
      foreach (st_h[p][j]) st_h[p][j] = 0;
      st_c[p] = 0;
    end
    n_frames++;
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int unsigned ca[$], cd[$];
    cfg = '0; lane_valid = '0; frame_end = 0; out_ready = 1;
    foreach (lane_word[l]) lane_word[l] = '0;
    m = new(H, F);
    m.randomize_weights(1200);
    for (int p = 0; p < NPIX; p++) begin
      st_h[p] = new[H];
      foreach (st_h[p][j]) st_h[p][j] = 0;
      st_c[p] = 0;
      offs[p] = int'($urandom_range(200));
      ca.push_back(32'(p)); cd.push_back(32'(offs[p]));
    end
    m.cfg_list(ca, cd);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (ca[i]) begin
      tick();
      cfg.we = 1; cfg.addr = 16'(ca[i]); cfg.data = 16'(cd[i]);
    end
    tick();
    cfg.we = 0;
    repeat (300) tick();                        // units clear their memories

    // frame 1: dense traffic, then 260 photons on pixel 77
    for (int n = 0; n < 500; n++) begin random_cycle(15, 0, NPIX-1, 0); tick(); end
    lane_valid = '0;
    repeat (100) tick();
    for (int n = 0; n < 260 * 40; n++) begin
      random_cycle(1, 256, NPIX-1, 1);          // other units only
      if (n % 40 == 0) put_word(0, 77);
      tick();
    end
    readout_and_check();

    // frame 2: sparse traffic
    for (int n = 0; n < 2000; n++) begin random_cycle(1, 0, NPIX-1, 0); tick(); end
    readout_and_check();

    // conservation of photons
    check(int'(photons_accepted) == n_acc_seen, "accepted counter");
    check(states_updated == photons_accepted, "one state write-back per accepted photon");
    check(int'(readouts_done) == 2 * N_UNITS, "each unit finished two read-outs");
    check(int'(photons_accepted + photons_dropped_busy + lane_drops) == n_driven,
          $sformatf("driven %0d = accepted %0d + busy %0d + lane %0d", n_driven,
                    photons_accepted, photons_dropped_busy, lane_drops));
    // mechanisms
    check(lane_drops > 0, "lane overflow happened");
    check(int'(photons_dropped_busy) > n_ro_offered, "busy discard happened");
    check(n_ro_offered > 0, "photons offered during read-out");
    check(n_sat > 0, "photon count saturated");
    check(n_backpressure > 0, "output back-pressure happened");
    check(n_frames == 2, "two frames");
    $display("driven %0d accepted %0d busy-discarded %0d lane-dropped %0d read-out offered %0d",
             n_driven, photons_accepted, photons_dropped_busy, lane_drops, n_ro_offered);
    $display("saturated pixels %0d back-pressure cycles %0d", n_sat, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
