// tb_gru_core -- self-checking test of the GRU core.
//
// The core is connected to a behavioural synchronous memory. Random
// coefficients are loaded over the cfg bus; a third of the pixels start
// from the zero state, the others from random states and counts (some at
// the saturation value 255). Random photons on random pixels are sent;
// after each write-back the written word is compared with the reference
// model. A request held high while the core works must see in_ready low,
// and back-to-back requests must be accepted every HIDDEN + 5 cycles
// (37 cycles, well inside the 168 cycles, 1.05 us at 160 MHz, that one of
// four cores may take for 4 Mphoton/s in total).
module tb_gru_core;
  import flim_pkg::*;
  import tb_flim_model_pkg::*;

  localparam int H = 32;
  localparam int NPIX = 256;
  localparam int SW = COUNT_W + H*DATA_W;
  localparam int NPHOT = 300;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, in_ready, upd_done;
  logic [7:0] in_pixel;
  fx_t in_x;
  logic mem_en, mem_we;
  logic [7:0] mem_addr;
  logic [SW-1:0] mem_wdata, mem_rdata;
  logic [SW-1:0] mem [NPIX];

  int checks = 0, failures = 0;

  gru_core #(.HIDDEN(H), .NPIX(NPIX)) dut (.*);

  always_ff @(posedge clk) if (mem_en) begin
    mem_rdata <= mem[mem_addr];
    if (mem_we) mem[mem_addr] <= mem_wdata;
  end

  flim_model m;
  longint st_h [NPIX][];
  int     st_cnt [NPIX];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int unsigned ca[$], cd[$];
    int t_prev;
    cfg = '0; in_valid = 0; in_pixel = 0; in_x = 0;
    m = new(H, 16);
    m.randomize_weights(1200);
    for (int p = 0; p < NPIX; p++) begin
      st_h[p] = new[H];
      mem[p] = '0;
      if (p % 3 == 0) begin
        foreach (st_h[p][j]) st_h[p][j] = 0;
        st_cnt[p] = 0;
      end else begin
        for (int j = 0; j < H; j++) begin
          st_h[p][j] = longint'($urandom_range(8000)) - 4000;
          mem[p][j*16 +: 16] = 16'(st_h[p][j]);
        end
        st_cnt[p] = (p % 7 == 0) ? 255 : int'($urandom_range(200));
        mem[p][H*16 +: 8] = 8'(st_cnt[p]);
      end
    end
    m.cfg_list(ca, cd);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (ca[i]) begin
      @(posedge clk); #1;
      cfg.we = 1; cfg.addr = 16'(ca[i]); cfg.data = 16'(cd[i]);
    end
    @(posedge clk); #1;
    cfg.we = 0;

    for (int n = 0; n < NPHOT; n++) begin
      int p;
      longint x;
      p = (n < 20) ? 5 : int'($urandom_range(NPIX-1));   // some repeats on one pixel
      x = (n % 50 == 7) ? 32767 : longint'($urandom_range(4095));
      in_valid = 1; in_pixel = 8'(p); in_x = fx_t'(x);
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;                  // accepted at this edge
      m.gru_step(st_h[p], x);
      if (st_cnt[p] < 255) st_cnt[p]++;
      in_x = fx_t'(0);                     // keep requesting: core must be busy
      check(!in_ready, "in_ready low while busy");
      @(posedge clk); #1;
      in_valid = 0;
      while (!upd_done) begin @(posedge clk); #1; end
      begin
        bit ok;
        ok = (mem[p][H*16 +: 8] == 8'(st_cnt[p]));
        for (int j = 0; j < H; j++)
          if (mem[p][j*16 +: 16] != 16'(st_h[p][j])) begin
            ok = 0;
            if (failures < 3)
              $display("  h[%0d] = %0d, expected %0d", j, mem[p][j*16 +: 16], st_h[p][j]);
          end
        check(ok, $sformatf("state of pixel %0d after photon %0d", p, n));
      end
    end

    // back-to-back requests: accept-to-accept interval
    t_prev = -1;
    in_valid = 1; in_pixel = 8'd9; in_x = fx_t'(100);
    for (int c = 0; c < 6 * (H + 5); c++) begin
      if (in_ready) begin
        if (t_prev >= 0) check(c - t_prev == H + 5,
                               $sformatf("back-to-back interval %0d", c - t_prev));
        t_prev = c;
      end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (H + 10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
