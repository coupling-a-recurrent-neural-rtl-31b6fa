// fcnn_core -- lifetime read-out network of one computation unit.
//
// After an integration period the core walks over all NPIX pixels of its
// unit. For each it reads the final GRU hidden state h from the unit's
// block RAM (port B, read-only) and evaluates a two-layer fully connected
// network (one hidden layer, as the design specifies):
//   u = relu(W1 h + b1)        FC_HIDDEN units
//   y = W2 u + b2              the lifetime estimate
// and pushes {pixel, photon count, y} into the unit's result FIFO. The
// memory read is issued in state RD (mem_en high for one cycle), so the
// computation unit can clear that word the cycle after.
//
// Schedule per pixel: RD (read issued), LOAD (state captured), HIDDEN
// cycles of layer 1 with FC_HIDDEN multipliers in parallel, one cycle of
// ReLU, FC_HIDDEN cycles of layer 2 on one multiplier, one rounding cycle,
// then PUSH, which waits while the FIFO is full. That is
// HIDDEN + FC_HIDDEN + 5 cycles per pixel when the FIFO accepts at once,
// 53 cycles and about 85 us for 256 pixels at 160 MHz with the defaults.
// The hidden-layer size (16), the ReLU and the schedule are this design's
// choices: the design names the network but not its sizes.
//
// Interface: pulse start for one sweep over all pixels; busy is high from
// the start until the last result is accepted, done pulses then.
module fcnn_core
  import flim_pkg::*;
#(
  parameter int HIDDEN    = 32,
  parameter int FC_HIDDEN = 16,
  parameter int NPIX      = 256,
  localparam int AW      = $clog2(NPIX),
  localparam int STATE_W = COUNT_W + HIDDEN*DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // BRAM port B
  output logic               mem_en,
  output logic [AW-1:0]      mem_addr,
  input  logic [STATE_W-1:0] mem_rdata,
  // result stream
  output logic               out_valid,
  input  logic               out_ready,
  output local_result_t      out_data
);

  // ---------------------------------------------------------------- coefficients
  fx_t w1 [FC_HIDDEN][HIDDEN];
  fx_t b1 [FC_HIDDEN];
  fx_t w2 [FC_HIDDEN];
  fx_t b2;

  localparam int HW = $clog2(HIDDEN);
  localparam int FW = $clog2(FC_HIDDEN);
  logic [15:0] a_w1, a_b1, a_w2;
  assign a_w1 = cfg.addr - CFG_W1_BASE;
  assign a_b1 = cfg.addr - CFG_B1_BASE;
  assign a_w2 = cfg.addr - CFG_W2_BASE;

  always_ff @(posedge clk) begin
    if (cfg.we) begin
      if (cfg.addr >= CFG_W1_BASE && a_w1 < 16'(FC_HIDDEN*HIDDEN))
        w1[FW'(a_w1 / 16'(HIDDEN))][HW'(a_w1 % 16'(HIDDEN))] <= fx_t'(cfg.data);
      if (cfg.addr >= CFG_B1_BASE && a_b1 < 16'(FC_HIDDEN)) b1[FW'(a_b1)] <= fx_t'(cfg.data);
      if (cfg.addr >= CFG_W2_BASE && a_w2 < 16'(FC_HIDDEN)) w2[FW'(a_w2)] <= fx_t'(cfg.data);
      if (cfg.addr == CFG_B2) b2 <= fx_t'(cfg.data);
    end
  end

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {S_IDLE, S_RD, S_LOAD, S_L1, S_RELU, S_L2, S_OUT, S_PUSH} state_e;
  state_e state;

  localparam int KW = (HIDDEN > FC_HIDDEN) ? $clog2(HIDDEN) : $clog2(FC_HIDDEN);

  logic [AW-1:0]      pix;
  logic [KW-1:0]      k;
  logic [COUNT_W-1:0] count_q;
  fx_t                h   [HIDDEN];
  acc_t               acc1[FC_HIDDEN];
  fx_t                u   [FC_HIDDEN];
  acc_t               acc2;
  fx_t                y;

  assign busy     = (state != S_IDLE);
  assign mem_en   = (state == S_RD);
  assign mem_addr = pix;

  assign out_valid         = (state == S_PUSH);
  assign out_data.pixel    = LOCAL_AW'(pix);
  assign out_data.count    = count_q;
  assign out_data.lifetime = y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pix     <= '0;
      k       <= '0;
      count_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pix   <= '0;
          state <= S_RD;
        end
        S_RD:   state <= S_LOAD;
        S_LOAD: begin
          count_q <= mem_rdata[HIDDEN*DATA_W +: COUNT_W];
          k       <= '0;
          state   <= S_L1;
        end
        S_L1: begin
          k <= k + 1'b1;
          if (k == KW'(HIDDEN-1)) state <= S_RELU;
        end
        S_RELU: begin
          k     <= '0;
          state <= S_L2;
        end
        S_L2: begin
          k <= k + 1'b1;
          if (k == KW'(FC_HIDDEN-1)) state <= S_OUT;
        end
        S_OUT:  state <= S_PUSH;
        S_PUSH: if (out_ready) begin
          if (pix == AW'(NPIX-1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            pix   <= pix + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- datapath
  always_ff @(posedge clk) begin
    unique case (state)
      S_LOAD: begin
        for (int j = 0; j < HIDDEN; j++)
          h[j] <= fx_t'(mem_rdata[j*DATA_W +: DATA_W]);
        for (int i = 0; i < FC_HIDDEN; i++)
          acc1[i] <= acc_t'(b1[i]) <<< FRAC;
      end
      S_L1: for (int i = 0; i < FC_HIDDEN; i++)
        acc1[i] <= acc1[i] + acc_t'(w1[i][HW'(k)]) * acc_t'(h[HW'(k)]);
      S_RELU: begin
        for (int i = 0; i < FC_HIDDEN; i++) begin
          u[i] <= acc1[i][ACC_W-1] ? fx_t'(0) : round_fx(acc1[i]);
        end
        acc2 <= acc_t'(b2) <<< FRAC;
      end
      S_L2:  acc2 <= acc2 + acc_t'(w2[FW'(k)]) * acc_t'(u[FW'(k)]);
      S_OUT: y <= round_fx(acc2);
      default: ;
    endcase
  end

endmodule
