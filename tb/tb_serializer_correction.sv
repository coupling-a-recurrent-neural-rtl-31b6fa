// tb_serializer_correction -- self-checking test of serialization,
// per-pixel correction and distribution.
//
// Random per-pixel offsets are loaded. Words are driven on the 128 lanes,
// first sparsely, then densely enough that lane registers overflow, then
// with a large gain that makes the Q3.12 input saturate. For every word the
// expected event {unit = id>>8, pixel = id[7:0], x} is computed here from
// x = sat(max(code - offset, 0) * gain / 256) and kept in a multiset; every
// output event must be found there. At the end the words never delivered
// must equal the lane_drops count, overflow must have happened, the
// arbiter must have delivered one event per cycle while words were
// waiting, and a lone word must take exactly two cycles to the output.
module tb_serializer_correction;
  import flim_pkg::*;

  localparam int L = 128;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic [L-1:0] lane_valid;
  tdc_word_t lane_word [L];
  logic [3:0] out_valid;
  photon_t out_ph;
  logic [31:0] lane_drops;

  serializer_correction #(.N_LANES(L), .UNITS(4)) dut (.*);

  int checks = 0, failures = 0;
  int offs [1024];
  int gain_v = 1024;
  int expected [int];      // key -> outstanding count
  int n_driven = 0, n_out = 0, n_sat = 0, n_clamp = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int key(int unit, int pix, int x);
    return (unit << 24) | (pix << 16) | (x & 16'hFFFF);
  endfunction

  function automatic int exp_x(int pixel, int ts);
    int c, v;
    c = (ts > offs[pixel]) ? ts - offs[pixel] : 0;
    v = (c * gain_v) >>> 8;
    return (v > 32767) ? 32767 : v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect outputs (state after each edge)
  int busy_run = 0, max_run = 0;
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (out_valid != 0) begin
        int u, k;
        checks++;
        if (!$onehot(out_valid)) begin failures++; $display("FAIL: out_valid not one-hot"); end
        u = $clog2(int'(out_valid));
        k = key(u, int'(out_ph.pixel), int'(out_ph.x));
        checks++;
        if (expected.exists(k) && expected[k] > 0) expected[k]--;
        else begin
          failures++;
          if (failures < 10) $display("FAIL: unexpected event unit %0d pix %0d x %0d", u, out_ph.pixel, out_ph.x);
        end
        n_out++;
        busy_run++;
        if (busy_run > max_run) max_run = busy_run;
      end else busy_run = 0;
    end
  end

  task automatic drive_cycle(int permille);
    for (int l = 0; l < L; l++) begin
      if (int'($urandom_range(999)) < permille) begin
        int pix, ts, x, k;
        pix = int'($urandom_range(1023));
        ts  = int'($urandom_range(4095));
        x   = exp_x(pix, ts);
        if (x == 32767) n_sat++;
        if (ts <= offs[pix]) n_clamp++;
        k = key(pix >> 8, pix & 255, x);
        if (expected.exists(k)) expected[k]++; else expected[k] = 1;
        lane_valid[l]     = 1'b1;
        lane_word[l].pixel = 10'(pix);
        lane_word[l].ts    = 12'(ts);
        n_driven++;
      end else lane_valid[l] = 1'b0;
    end
  endtask

  initial begin
    int remaining, t_drive, t_out;
    cfg = '0; lane_valid = '0;
    foreach (lane_word[l]) lane_word[l] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < 1024; p++) begin
      offs[p] = int'($urandom_range(300));
      @(posedge clk); #1;
      cfg.we = 1; cfg.addr = 16'(p); cfg.data = 16'(offs[p]);
    end
    @(posedge clk); #1 cfg.we = 0;

    // latency of a lone word
    lane_valid[17] = 1; lane_word[17].pixel = 10'd700; lane_word[17].ts = 12'd2000;
    expected[key(2, 700-512, exp_x(700, 2000))] = 1; n_driven++;
    @(posedge clk); t_drive = int'($time); #1 lane_valid = '0;
    while (out_valid == 0) begin @(posedge clk); #1; end
    t_out = int'($time) - 1;
    check((t_out - t_drive) / 10 == 2, $sformatf("lone word latency %0d", (t_out - t_drive) / 10));

    // sparse, then dense traffic
    for (int n = 0; n < 400; n++) begin drive_cycle(2);   @(posedge clk); #1; end
    for (int n = 0; n < 300; n++) begin drive_cycle(150); @(posedge clk); #1; end
    lane_valid = '0;
    repeat (200) @(posedge clk);
    #1;
    // large gain: saturation
    cfg.we = 1; cfg.addr = CFG_GAIN; cfg.data = 16'h1000; gain_v = 4096;
    @(posedge clk); #1 cfg.we = 0;
    for (int n = 0; n < 200; n++) begin drive_cycle(5); @(posedge clk); #1; end
    lane_valid = '0;
    repeat (200) @(posedge clk);
    #1;

    remaining = 0;
    foreach (expected[k]) remaining += expected[k];
    check(remaining == int'(lane_drops),
          $sformatf("undelivered %0d vs lane_drops %0d", remaining, lane_drops));
    check(lane_drops > 0, "lane overflow happened");
    check(n_sat > 0 && n_clamp > 0, "saturation and clamp exercised");
    check(max_run >= 100, $sformatf("longest run of back-to-back events %0d", max_run));
    $display("driven %0d delivered %0d dropped %0d", n_driven, n_out, lane_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
