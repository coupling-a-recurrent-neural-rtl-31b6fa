// tb_computation_unit -- self-checking test of one computation unit at
// reduced size (8 hidden units, 4 read-out units, 16 pixels, FIFO of 4).
//
// Photons are offered at random times. The test predicts, cycle by cycle,
// which ones the unit must accept: none during the clearing after reset,
// one every HIDDEN+5 cycles at most while integrating (the others are
// discarded as busy), none between frame_end and the end of read-out.
// Accepted photons are applied to a per-pixel reference GRU. After
// frame_end the 16 results are read with random back-pressure and
// compared with the reference read-out network. A second frame checks
// that states of the first are not carried over (pixels without photons
// report count 0), and a frame_end during read-out must start one more
// read-out afterwards. The read-out time with no back-pressure is checked
// against NPIX * (HIDDEN + FC_HIDDEN + 5) cycles.
module tb_computation_unit;
  import flim_pkg::*;
  import tb_flim_model_pkg::*;

  localparam int H = 8, F = 4, NPIX = 16, FD = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic ph_valid, frame_end;
  photon_t ph;
  logic out_valid, out_ready;
  local_result_t out_data;
  logic ph_accepted, ph_dropped, upd_done, readout_active, readout_done;

  computation_unit #(.HIDDEN(H), .FC_HIDDEN(F), .NPIX(NPIX), .FIFO_DEPTH(FD)) dut (.*);

  int checks = 0, failures = 0;
  int n_busy_drop = 0, n_ro_drop = 0, n_init_drop = 0, n_acc = 0, n_pending = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  flim_model m;
  longint st_h [NPIX][];
  int     st_c [NPIX];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_model();
    for (int p = 0; p < NPIX; p++) begin
      st_h[p] = new[H];
      foreach (st_h[p][j]) st_h[p][j] = 0;
      st_c[p] = 0;
    end
  endtask

  // offer photons for n cycles; next_ready tracks when the GRU is free
  longint next_ready = 0;
  task automatic integrate(int ncyc, int permille);
    for (int n = 0; n < ncyc; n++) begin
      @(posedge clk); #1;
      ph_valid = (int'($urandom_range(999)) < permille);
      ph.pixel = 8'($urandom_range(NPIX-1));
      ph.x     = fx_t'($urandom_range(4095));
      #1;
      if (ph_valid) begin
        bit exp_acc;
        exp_acc = (cyc >= next_ready);
        check(ph_accepted == exp_acc && ph_dropped == !exp_acc,
              $sformatf("accept decision at cycle %0d", cyc));
        if (exp_acc) begin
          m.gru_step(st_h[int'(ph.pixel)], longint'(ph.x));
          if (st_c[int'(ph.pixel)] < 255) st_c[int'(ph.pixel)]++;
          next_ready = cyc + H + 5;
          n_acc++;
        end else n_busy_drop++;
      end
    end
    @(posedge clk); #1 ph_valid = 0;
  endtask

  // end the frame, offer photons during read-out (all dropped), check results
  task automatic readout(bit backpressure, bit second_end);
    int got;
    longint t0, t1;
    got = 0;
    frame_end = 1;
    @(posedge clk); #1 frame_end = 0;
    t0 = -1; t1 = -1;
    while (t1 < 0) begin
      ph_valid = (int'($urandom_range(9)) == 0);
      ph.pixel = 8'($urandom_range(NPIX-1));
      ph.x     = fx_t'(100);
      out_ready = backpressure ? 1'($urandom_range(3) == 0) : 1'b1;
      if (second_end && got == 3) begin frame_end = 1; n_pending++; end
      #1;
      if (ph_valid) begin
        check(!ph_accepted && ph_dropped, "photon during read-out dropped");
        n_ro_drop++;
      end
      if (out_valid && out_ready) begin
        int p;
        p = int'(out_data.pixel);
        check(p == got, "result order");
        check(out_data.count == 8'(st_c[p]) && out_data.lifetime == fx_t'(m.fcnn(st_h[p])),
              $sformatf("pixel %0d result c=%0d y=%0d exp c=%0d y=%0d", p, out_data.count,
                        out_data.lifetime, st_c[p], m.fcnn(st_h[p])));
        got++;
      end
      if (readout_active && t0 < 0) t0 = cyc;
      if (readout_done) t1 = cyc;
      @(posedge clk); #1;
      frame_end = 0;
    end
    ph_valid = 0;
    // the FIFO may still hold results
    while (got < NPIX) begin
      out_ready = 1;
      #1;
      if (out_valid) begin
        int p;
        p = int'(out_data.pixel);
        check(out_data.count == 8'(st_c[p]) && out_data.lifetime == fx_t'(m.fcnn(st_h[p])),
              $sformatf("pixel %0d late result", p));
        got++;
      end
      @(posedge clk); #1;
    end
    check(got == NPIX, "all pixels reported");
    if (!backpressure)
      check(t1 - t0 == NPIX * (H + F + 5), $sformatf("read-out cycles %0d", t1 - t0));
    clear_model();
    next_ready = cyc + 2;
  endtask

  initial begin
    int unsigned ca[$], cd[$];
    cfg = '0; ph_valid = 0; ph = '0; frame_end = 0; out_ready = 1;
    m = new(H, F);
    m.randomize_weights(1500);
    clear_model();
    m.cfg_list(ca, cd);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // a photon during the clearing after reset is dropped
    ph_valid = 1; ph.pixel = 8'd3; ph.x = fx_t'(5);
    #1;
    check(ph_dropped && !ph_accepted, "photon during clearing dropped");
    n_init_drop++;
    foreach (ca[i]) begin
      @(posedge clk); #1;
      ph_valid = 0;
      cfg.we = 1; cfg.addr = 16'(ca[i]); cfg.data = 16'(cd[i]);
    end
    @(posedge clk); #1 cfg.we = 0;
    repeat (NPIX + 4) @(posedge clk);
    next_ready = cyc + 1;

    integrate(600, 100);
    readout(0, 0);
    integrate(150, 30);           // frame 2: few photons, most pixels empty
    readout(1, 1);                // back-pressure, and a frame_end during read-out
    // the pending frame_end starts another read-out of an empty frame
    begin
      int got = 0;
      while (got < NPIX) begin
        out_ready = 1;
        #1;
        if (out_valid) begin
          check(out_data.count == 0 && out_data.lifetime == fx_t'(m.fcnn(st_h[0])),
                $sformatf("empty frame result pix %0d c=%0d y=%0d exp %0d", out_data.pixel, out_data.count, out_data.lifetime, m.fcnn(st_h[0])));
          got++;
        end
        @(posedge clk); #1;
      end
    end
    repeat (5) @(posedge clk);
    #1 next_ready = cyc + 1;
    integrate(200, 50);

    check(n_busy_drop > 0, "busy drop happened");
    check(n_ro_drop > 0, "read-out drop happened");
    check(n_pending > 0, "frame_end during read-out happened");
    $display("accepted %0d busy-dropped %0d readout-dropped %0d", n_acc, n_busy_drop, n_ro_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
