// serializer_correction -- turns the sensor's parallel timestamp lanes into
// one corrected photon event per clock and routes it to the computation
// unit that owns the pixel.
//
// Serializer. Each of the N_LANES TDC lanes may present a timestamp word
// {pixel id, TDC code} with a valid bit in any cycle. Every lane has a
// one-word holding register; a word that arrives while its lane's register
// is still occupied is dropped (lane_drops counts them). A round-robin
// arbiter takes one occupied register per clock, so no lane can starve.
//
// Correction. The chosen word's code is corrected by a per-pixel offset
// from a 1024-entry table (skew of the pixel's path to its TDC), clamped at
// zero, and scaled by a global gain into the network's Q3.12 input:
//   x = sat((max(code - offset[pixel], 0) * gain) >> 8)
// Offset table and gain are written over the cfg bus. The default gain,
// 0x0400 = 4.0, makes x = code/1024.
//
// Distribution. Pixel id = row*32 + col; the unit is id >> 8 (rows 8u to
// 8u+7, a 32 x 8 quarter of the sensor) and id[7:0] the pixel inside it.
//
// Timing: a word taken by a lane at edge t can leave the arbiter at t+1 and
// appears on the outputs after edge t+2 (out_valid is one-hot over units).
// The design says only that timestamps are serialized, corrected and
// distributed by SPAD id; the holding registers, arbiter, offset-and-gain
// correction and all widths are this design's choices.
module serializer_correction
  import flim_pkg::*;
#(
  parameter int N_LANES = N_TDC,
  parameter int UNITS   = N_UNITS,
  localparam int LW = (N_LANES > 1) ? $clog2(N_LANES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  logic [N_LANES-1:0] lane_valid,
  input  tdc_word_t        lane_word [N_LANES],
  output logic [UNITS-1:0] out_valid,
  output photon_t          out_ph,
  output logic [31:0]      lane_drops
);

  localparam int NPIX_SENSOR = 1 << PIX_ID_W;

  // ---------------------------------------------------------------- correction table
  logic [TS_W-1:0] offset_tab [NPIX_SENSOR];
  logic [15:0]     gain;

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.addr < CFG_OFFSET_BASE + 16'(NPIX_SENSOR))
      offset_tab[PIX_ID_W'(cfg.addr - CFG_OFFSET_BASE)] <= cfg.data[TS_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                gain <= 16'h0400;
    else if (cfg.we && cfg.addr == CFG_GAIN)   gain <= cfg.data;
  end

  // ---------------------------------------------------------------- lane registers
  logic [N_LANES-1:0] pend;
  tdc_word_t          hold [N_LANES];
  logic [LW-1:0]      rr_ptr;      // lane with the highest priority
  logic               sel_any;
  logic [LW-1:0]      sel;
  logic [N_LANES-1:0] pop;
  logic [$clog2(N_LANES+1)-1:0] ndrop;

  // round robin: first occupied lane at or after rr_ptr, cyclically
  logic [LW-1:0] idx;

  always_comb begin
    sel_any = 1'b0;
    sel     = '0;
    idx     = '0;
    for (int i = 0; i < N_LANES; i++) begin
      idx = LW'((32'(rr_ptr) + 32'(i)) % 32'(N_LANES));
      if (!sel_any && pend[idx]) begin
        sel_any = 1'b1;
        sel     = LW'(idx);
      end
    end
    pop = '0;
    if (sel_any) pop[sel] = 1'b1;
  end

  always_comb begin
    ndrop = '0;
    for (int i = 0; i < N_LANES; i++)
      if (lane_valid[i] && pend[i] && !pop[i]) ndrop = ndrop + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= '0;
      rr_ptr     <= '0;
      lane_drops <= '0;
    end else begin
      for (int i = 0; i < N_LANES; i++) begin
        if (lane_valid[i] && (!pend[i] || pop[i])) pend[i] <= 1'b1;
        else if (pop[i])                           pend[i] <= 1'b0;
      end
      if (sel_any) rr_ptr <= (sel == LW'(N_LANES-1)) ? '0 : sel + 1'b1;
      lane_drops <= lane_drops + 32'(ndrop);
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_LANES; i++)
      if (lane_valid[i] && (!pend[i] || pop[i])) hold[i] <= lane_word[i];
  end

  // ---------------------------------------------------------------- stage 1: selected word + offset
  logic            s1_valid;
  tdc_word_t       s1_word;
  logic [TS_W-1:0] s1_off;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= sel_any;
  end

  always_ff @(posedge clk) begin
    if (sel_any) begin
      s1_word <= hold[sel];
      s1_off  <= offset_tab[hold[sel].pixel];
    end
  end

  // ---------------------------------------------------------------- stage 2: correct, scale, route
  logic [TS_W-1:0]        corr;
  logic [TS_W+16-9:0]     shifted;
  fx_t                    x_c;

  always_comb begin
    corr    = (s1_word.ts > s1_off) ? s1_word.ts - s1_off : '0;
    shifted = (TS_W+8)'(((TS_W+16)'(corr) * (TS_W+16)'(gain)) >> 8);
    x_c     = (shifted > (TS_W+8)'(FX_MAX)) ? FX_MAX : fx_t'(shifted);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= '0;
    else begin
      out_valid <= '0;
      if (s1_valid) out_valid[s1_word.pixel[PIX_ID_W-1:LOCAL_AW]] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      out_ph.pixel <= s1_word.pixel[LOCAL_AW-1:0];
      out_ph.x     <= x_c;
    end
  end

endmodule
