// gru_core -- event-driven quantized GRU cell shared by the pixels of one
// computation unit.
//
// For every accepted photon the core performs one step of a single-layer
// GRU with input size 1 (the corrected timestamp x) and HIDDEN hidden units,
// in the gate order and form of the standard PyTorch GRU:
//   r  = sigmoid(W_ir x + b_ir + W_hr h + b_hr)
//   z  = sigmoid(W_iz x + b_iz + W_hz h + b_hz)
//   n  = tanh   (W_in x + b_in + r * (W_hn h + b_hn))
//   h' = (1 - z) * n + z * h          computed as  n + z * (h - n)
// The hidden state h of the photon's pixel is read from the unit's block
// RAM, updated and written back, so one core serves all pixels of the unit.
// A state word holds the HIDDEN values of h (value j in bits 16j+15:16j)
// and above them the pixel's saturating 8-bit photon count.
//
// Schedule (one photon at a time, HIDDEN+5 cycles from accept to accept):
//   accept : in_valid && in_ready; the BRAM read of the pixel is issued
//   LOAD   : state arrives; accumulators take input term and biases
//   MAC    : HIDDEN cycles; cycle k adds column k of the three recurrent
//            matrices times h[k] (3*HIDDEN multipliers working in parallel)
//   ACT1   : r, z by sigmoid; W_hn h + b_hn and the input term rounded
//   ACT2   : n by tanh
//   WB     : h' and count+1 written back; in_ready returns next cycle
// With HIDDEN = 32 this is 37 cycles, 231 ns at 160 MHz, inside the 1.05 us
// per photon that one of four cores needs for 4 Mphoton/s in total. The
// parallel-MAC schedule is this design's choice; the published core was
// produced by high-level synthesis and its schedule is not given.
//
// Coefficients are held in registers written through the cfg bus (address
// map in flim_pkg); the trained weights are not part of the design.
// Arithmetic: Q3.12 operands, 48-bit accumulation, convergent rounding.
module gru_core
  import flim_pkg::*;
#(
  parameter int HIDDEN = 32,
  parameter int NPIX   = 256,
  localparam int AW      = $clog2(NPIX),
  localparam int STATE_W = COUNT_W + HIDDEN*DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  // photon event
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [AW-1:0]      in_pixel,
  input  fx_t                in_x,
  output logic               upd_done,   // pulse: a state was written back
  // BRAM port A
  output logic               mem_en,
  output logic               mem_we,
  output logic [AW-1:0]      mem_addr,
  output logic [STATE_W-1:0] mem_wdata,
  input  logic [STATE_W-1:0] mem_rdata
);

  localparam int G = 3*HIDDEN;   // rows of the stacked gate matrices

  // ---------------------------------------------------------------- coefficients
  fx_t w_ih [G];
  fx_t b_ih [G];
  fx_t b_hh [G];
  fx_t w_hh [G][HIDDEN];

  localparam int GW = $clog2(G);
  localparam int HW = $clog2(HIDDEN);
  logic [15:0] a_wih, a_bih, a_bhh, a_whh;
  assign a_wih = cfg.addr - CFG_WIH_BASE;
  assign a_bih = cfg.addr - CFG_BIH_BASE;
  assign a_bhh = cfg.addr - CFG_BHH_BASE;
  assign a_whh = cfg.addr - CFG_WHH_BASE;

  always_ff @(posedge clk) begin
    if (cfg.we) begin
      if (cfg.addr >= CFG_WIH_BASE && a_wih < 16'(G)) w_ih[GW'(a_wih)] <= fx_t'(cfg.data);
      if (cfg.addr >= CFG_BIH_BASE && a_bih < 16'(G)) b_ih[GW'(a_bih)] <= fx_t'(cfg.data);
      if (cfg.addr >= CFG_BHH_BASE && a_bhh < 16'(G)) b_hh[GW'(a_bhh)] <= fx_t'(cfg.data);
      if (cfg.addr >= CFG_WHH_BASE && a_whh < 16'(G*HIDDEN))
        w_hh[GW'(a_whh / 16'(HIDDEN))][HW'(a_whh % 16'(HIDDEN))] <= fx_t'(cfg.data);
    end
  end

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MAC, S_ACT1, S_ACT2, S_WB} state_e;
  state_e state;

  logic [AW-1:0]            pix_q;
  fx_t                      x_q;
  logic [$clog2(HIDDEN)-1:0] k;
  logic [COUNT_W-1:0]       count_q;

  fx_t  h     [HIDDEN];
  acc_t acc_r [HIDDEN];
  acc_t acc_z [HIDDEN];
  acc_t acc_hn[HIDDEN];
  acc_t acc_in[HIDDEN];
  fx_t  r     [HIDDEN];
  fx_t  z     [HIDDEN];
  fx_t  hn    [HIDDEN];
  fx_t  xin   [HIDDEN];
  fx_t  n     [HIDDEN];
  fx_t  h_new [HIDDEN];

  assign in_ready = (state == S_IDLE);
  wire   accept   = in_valid && in_ready;

  // BRAM port A: read on accept, write in WB
  always_comb begin
    mem_en   = accept || (state == S_WB);
    mem_we   = (state == S_WB);
    mem_addr = (state == S_WB) ? pix_q : in_pixel;
    for (int j = 0; j < HIDDEN; j++) begin
      h_new[j] = fx_add(n[j], fx_mul(z[j], fx_sub(h[j], n[j])));
      mem_wdata[j*DATA_W +: DATA_W] = h_new[j];
    end
    mem_wdata[HIDDEN*DATA_W +: COUNT_W] =
        (count_q == '1) ? count_q : count_q + COUNT_W'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      k        <= '0;
      pix_q    <= '0;
      x_q      <= '0;
      count_q  <= '0;
      upd_done <= 1'b0;
    end else begin
      upd_done <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          pix_q <= in_pixel;
          x_q   <= in_x;
          state <= S_LOAD;
        end
        S_LOAD: begin
          count_q <= mem_rdata[HIDDEN*DATA_W +: COUNT_W];
          k       <= '0;
          state   <= S_MAC;
        end
        S_MAC: begin
          k <= k + 1'b1;
          if (k == ($clog2(HIDDEN))'(HIDDEN-1)) state <= S_ACT1;
        end
        S_ACT1: state <= S_ACT2;
        S_ACT2: state <= S_WB;
        S_WB: begin
          upd_done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- datapath
  always_ff @(posedge clk) begin
    unique case (state)
      S_LOAD: for (int j = 0; j < HIDDEN; j++) begin
        h[j]      <= fx_t'(mem_rdata[j*DATA_W +: DATA_W]);
        acc_r[j]  <= acc_t'(w_ih[j]) * acc_t'(x_q)
                   + ((acc_t'(b_ih[j]) + acc_t'(b_hh[j])) <<< FRAC);
        acc_z[j]  <= acc_t'(w_ih[HIDDEN+j]) * acc_t'(x_q)
                   + ((acc_t'(b_ih[HIDDEN+j]) + acc_t'(b_hh[HIDDEN+j])) <<< FRAC);
        acc_in[j] <= acc_t'(w_ih[2*HIDDEN+j]) * acc_t'(x_q)
                   + (acc_t'(b_ih[2*HIDDEN+j]) <<< FRAC);
        acc_hn[j] <= acc_t'(b_hh[2*HIDDEN+j]) <<< FRAC;
      end
      S_MAC: for (int j = 0; j < HIDDEN; j++) begin
        acc_r[j]  <= acc_r[j]  + acc_t'(w_hh[j][k])          * acc_t'(h[k]);
        acc_z[j]  <= acc_z[j]  + acc_t'(w_hh[HIDDEN+j][k])   * acc_t'(h[k]);
        acc_hn[j] <= acc_hn[j] + acc_t'(w_hh[2*HIDDEN+j][k]) * acc_t'(h[k]);
      end
      S_ACT1: for (int j = 0; j < HIDDEN; j++) begin
        r[j]   <= sigmoid_pwl(round_fx(acc_r[j]));
        z[j]   <= sigmoid_pwl(round_fx(acc_z[j]));
        hn[j]  <= round_fx(acc_hn[j]);
        xin[j] <= round_fx(acc_in[j]);
      end
      S_ACT2: for (int j = 0; j < HIDDEN; j++) begin
        n[j] <= tanh_pwl(fx_add(xin[j], fx_mul(r[j], hn[j])));
      end
      default: ;
    endcase
  end

endmodule
