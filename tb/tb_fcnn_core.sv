// tb_fcnn_core -- self-checking test of the read-out network.
//
// A behavioural memory holds random hidden states and counts for all 256
// pixels, a fifth of them zero (pixels that saw no photon).
// Two sweeps run: one with out_ready always high, where the time per pixel
// must be HIDDEN + FC_HIDDEN + 5 cycles, and one with random back-pressure.
// Every result {pixel, count, lifetime} is compared with the reference
// model, and done must pulse once after the last pixel.
module tb_fcnn_core;
  import flim_pkg::*;
  import tb_flim_model_pkg::*;

  localparam int H = 32, F = 16, NPIX = 256;
  localparam int SW = COUNT_W + H*DATA_W;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic start, busy, done;
  logic mem_en;
  logic [7:0] mem_addr;
  logic [SW-1:0] mem_rdata;
  logic out_valid, out_ready;
  local_result_t out_data;
  logic [SW-1:0] mem [NPIX];

  int checks = 0, failures = 0;

  fcnn_core #(.HIDDEN(H), .FC_HIDDEN(F), .NPIX(NPIX)) dut (.*);

  always_ff @(posedge clk) if (mem_en) mem_rdata <= mem[mem_addr];

  flim_model m;
  longint exp_y [NPIX];
  int     exp_c [NPIX];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ca[$], cd[$];
    cfg = '0; start = 0; out_ready = 1;
    m = new(H, F);
    m.randomize_weights(1500);
    for (int p = 0; p < NPIX; p++) begin
      longint h[];
      h = new[H];
      for (int w = 0; w < SW; w += 32) mem[p][w +: 32] = $urandom();
      if (p % 5 == 0) begin
        mem[p] = '0;                    // no photon
        foreach (h[j]) h[j] = 0;
        exp_c[p] = 0;
      end else begin
        for (int j = 0; j < H; j++) begin
          h[j] = longint'($urandom_range(8192)) - 4096;
          mem[p][j*16 +: 16] = 16'(h[j]);
        end
        exp_c[p] = int'(mem[p][H*16 +: 8]);
      end
      exp_y[p] = m.fcnn(h);
    end
    m.cfg_list(ca, cd);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ca[i]) begin
      cfg.we <= 1; cfg.addr <= 16'(ca[i]); cfg.data <= 16'(cd[i]);
      @(posedge clk);
    end
    cfg.we <= 0;

    for (int sweep = 0; sweep < 2; sweep++) begin
      int got, ndone;
      longint t0, t1;
      got = 0; ndone = 0;
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      start <= 0;
      t0 = $time;
      while (ndone == 0) begin
        out_ready <= (sweep == 0) ? 1'b1 : 1'($urandom_range(2) != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          int p;
          p = int'(out_data.pixel);
          check(p == got, $sformatf("pixel order %0d vs %0d", p, got));
          check(out_data.count == 8'(exp_c[p]) && out_data.lifetime == fx_t'(exp_y[p]),
                $sformatf("pixel %0d: got c=%0d y=%0d exp c=%0d y=%0d", p, out_data.count,
                          out_data.lifetime, exp_c[p], exp_y[p]));
          got++;
        end
        if (done) ndone++;
      end
      t1 = $time;
      check(got == NPIX, $sformatf("results %0d", got));
      if (sweep == 0)
        check((t1 - t0) / 10 == NPIX * (H + F + 5) + 1,   // + the done pulse
              $sformatf("sweep cycles %0d expected %0d", (t1 - t0) / 10, NPIX * (H + F + 5) + 1));
      @(posedge clk);
      check(!busy && !done, "idle after sweep");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
