// computation_unit -- one of the four lifetime engines, in charge of a
// quarter of the sensor (32 x 8 = 256 pixels).
//
// It holds one GRU core, one FCNN core, the block RAM with the pixels'
// hidden states between them, and the FIFO the FCNN streams its results
// into. It runs in phases:
//   INIT       after reset: every state word is cleared through port A
//              (NPIX cycles); the pixels start with h = 0.
//   INTEGRATE  photons are passed to the GRU core. A photon that arrives
//              while the core is still busy with the previous one is
//              discarded, as in the published design (drop pulses).
//   DRAIN      frame_end was seen; new photons are discarded while the GRU
//              finishes the photon in flight.
//   READOUT    the FCNN core sweeps all pixels (read-only port B) and
//              writes the FIFO; photons are discarded. The cycle after the
//              FCNN reads a pixel, the unit clears that word through port A,
//              which the GRU does not use during read-out, so the next
//              integration period starts from h = 0 (the zero initial state).
// Clearing during read-out and discarding photons meanwhile are this
// design's choices: the design says only that the FCNN runs once per pixel
// after integration, that a photon arriving while the unit is busy is
// discarded, and that the state starts at zero. frame_end is a one-cycle
// pulse marking the end of an integration period; one that arrives during
// read-out is held and served when the read-out finishes.
// The assertions below samples rst_n synchronously (disable iff) while the
// flip-flops use it as an asynchronous reset; verilator reports this as
// SYNCASYNCNET, which is expected and harmless.
module computation_unit
  import flim_pkg::*;
#(
  parameter int HIDDEN     = 32,
  parameter int FC_HIDDEN  = 16,
  parameter int NPIX       = 256,
  parameter int FIFO_DEPTH = 16,
  localparam int AW      = $clog2(NPIX),
  localparam int STATE_W = COUNT_W + HIDDEN*DATA_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_wr_t       cfg,
  // photon events of this unit
  input  logic          ph_valid,
  input  photon_t       ph,
  input  logic          frame_end,
  // results
  output logic          out_valid,
  input  logic          out_ready,
  output local_result_t out_data,
  // status
  output logic          ph_accepted,   // pulse: photon handed to the GRU
  output logic          ph_dropped,    // pulse: photon discarded
  output logic          upd_done,      // pulse: GRU wrote a state back
  output logic          readout_active,
  output logic          readout_done   // pulse: read-out sweep finished
);

  typedef enum logic [1:0] {P_INIT, P_INTEGRATE, P_DRAIN, P_READOUT} phase_e;
  phase_e phase;

  logic          frame_pending;
  logic [AW-1:0] init_addr;
  logic          clr_en;       // clear the word the FCNN read last cycle
  logic [AW-1:0] clr_addr;

  // GRU side
  logic               g_ready, g_valid;
  logic               g_en, g_we;
  logic [AW-1:0]      g_addr;
  logic [STATE_W-1:0] g_wdata;
  // BRAM port A (shared by INIT and the GRU)
  logic               a_en, a_we;
  logic [AW-1:0]      a_addr;
  logic [STATE_W-1:0] a_wdata, a_rdata;
  // FCNN side
  logic               f_start, f_busy, f_done;
  logic               b_en;
  logic [AW-1:0]      b_addr;
  logic [STATE_W-1:0] b_rdata;
  logic               f_valid, f_ready;
  local_result_t      f_data;

  assign g_valid     = ph_valid && (phase == P_INTEGRATE) && !frame_pending;
  assign ph_accepted = g_valid && g_ready;
  assign ph_dropped  = ph_valid && !ph_accepted;
  assign readout_active = (phase == P_READOUT);
  assign readout_done   = f_done;
  assign f_start     = (phase == P_DRAIN) && g_ready;

  always_comb begin
    if (phase == P_INIT) begin
      a_en    = 1'b1;
      a_we    = 1'b1;
      a_addr  = init_addr;
      a_wdata = '0;
    end else if (phase == P_READOUT) begin
      a_en    = clr_en;
      a_we    = clr_en;
      a_addr  = clr_addr;
      a_wdata = '0;
    end else begin
      a_en    = g_en;
      a_we    = g_we;
      a_addr  = g_addr;
      a_wdata = g_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_en   <= 1'b0;
      clr_addr <= '0;
    end else begin
      clr_en   <= b_en;
      clr_addr <= b_addr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase         <= P_INIT;
      frame_pending <= 1'b0;
      init_addr     <= '0;
    end else begin
      if (frame_end) frame_pending <= 1'b1;
      unique case (phase)
        P_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (init_addr == AW'(NPIX-1)) phase <= P_INTEGRATE;
        end
        P_INTEGRATE: if (frame_pending || frame_end) phase <= P_DRAIN;
        P_DRAIN: if (g_ready) begin
          frame_pending <= frame_end;   // a new frame_end in this cycle stays pending
          phase         <= P_READOUT;
        end
        P_READOUT: if (f_done) phase <= P_INTEGRATE;
        default: phase <= P_INIT;
      endcase
    end
  end

  gru_core #(.HIDDEN(HIDDEN), .NPIX(NPIX)) u_gru (
    .clk, .rst_n, .cfg,
    .in_valid (g_valid),
    .in_ready (g_ready),
    .in_pixel (AW'(ph.pixel)),
    .in_x     (ph.x),
    .upd_done,
    .mem_en   (g_en),
    .mem_we   (g_we),
    .mem_addr (g_addr),
    .mem_wdata(g_wdata),
    .mem_rdata(a_rdata)
  );

  state_bram #(.WIDTH(STATE_W), .DEPTH(NPIX)) u_bram (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_addr, .b_rdata
  );

  fcnn_core #(.HIDDEN(HIDDEN), .FC_HIDDEN(FC_HIDDEN), .NPIX(NPIX)) u_fcnn (
    .clk, .rst_n, .cfg,
    .start    (f_start),
    .busy     (f_busy),
    .done     (f_done),
    .mem_en   (b_en),
    .mem_addr (b_addr),
    .mem_rdata(b_rdata),
    .out_valid(f_valid),
    .out_ready(f_ready),
    .out_data (f_data)
  );

  logic [$clog2(FIFO_DEPTH):0] fifo_level;   // occupancy
  logic [$bits(local_result_t)-1:0] fifo_out;

  sync_fifo #(.WIDTH($bits(local_result_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (f_valid),
    .in_ready (f_ready),
    .in_data  (f_data),
    .out_valid,
    .out_ready,
    .out_data (fifo_out),
    .level    (fifo_level)
  );
  assign out_data = local_result_t'(fifo_out);

  // the FIFO never holds more than its depth
  a_fifo_level: assert property (@(posedge clk) disable iff (!rst_n)
                                 fifo_level <= ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH));
  // the FCNN is only started once per read-out and only when idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 f_start |-> !f_busy);
  // the GRU never sees a photon outside integration
  a_gru_integrate: assert property (@(posedge clk) disable iff (!rst_n)
                                    g_valid |-> phase == P_INTEGRATE);

endmodule
