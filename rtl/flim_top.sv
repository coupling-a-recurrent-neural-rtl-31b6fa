// flim_top -- FPGA side of a SPAD TCSPC lifetime imager that estimates the
// fluorescence lifetime of every pixel with a recurrent neural network fed
// directly by photon timestamps, without histograms.
//
// Data flow (left to right as in the system's block diagram):
//   TDC lanes -> serializer_correction -> 4 x computation_unit -> io_arbiter
// The sensor (32x32 SPADs, 128 TDCs, 50 ps) delivers timestamp words on
// N_LANES parallel lanes. They are serialized one per clock, corrected and
// sent to the unit owning the pixel (a 32x8 quarter of the sensor). There a
// GRU core updates the pixel's hidden state, kept in block RAM, with each
// photon; photons that find the unit busy are discarded. frame_end closes
// an integration period: every unit runs its FCNN core over its 256 pixels
// and the lifetimes, with photon counts, leave through the IO block as a
// valid/ready stream of {pixel id, count, lifetime}.
// The cfg bus loads offsets, gain and network coefficients (map in
// flim_pkg); it is broadcast, so the four units share one set of weights.
// Status outputs count accepted photons, photons discarded at a busy unit
// and words dropped at a full serializer lane, GRU state write-backs and
// finished read-out sweeps.
// The assertions inside the units use rst_n synchronously (disable iff)
// while the flip-flops use it as an asynchronous reset; verilator's
// SYNCASYNCNET note about rst_n comes from that and is harmless.
// Clock: 160 MHz in the published system. At that clock one unit needs
// HIDDEN+5 = 37 cycles per photon (4.3 Mphoton/s per unit, 17 for four).
module flim_top
  import flim_pkg::*;
#(
  parameter int N_LANES    = N_TDC,
  parameter int HIDDEN     = 32,
  parameter int FC_HIDDEN  = 16,
  parameter int FIFO_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  // sensor timestamp lanes
  input  logic [N_LANES-1:0] lane_valid,
  input  tdc_word_t          lane_word [N_LANES],
  input  logic               frame_end,
  // result stream to the host link
  output logic               out_valid,
  input  logic               out_ready,
  output result_t            out_data,
  // status
  output logic [31:0]        photons_accepted,
  output logic [31:0]        photons_dropped_busy,
  output logic [31:0]        lane_drops,
  output logic [31:0]        states_updated,   // GRU state write-backs, all units
  output logic [31:0]        readouts_done,    // finished read-out sweeps, all units
  output logic [N_UNITS-1:0] readout_active
);

  localparam int NPIX = 1 << LOCAL_AW;   // 256 pixels per unit

  logic [N_UNITS-1:0] ph_valid;
  photon_t            ph;
  logic [N_UNITS-1:0] u_valid, u_ready, u_acc, u_drop, u_upd, u_rdone;
  local_result_t      u_data [N_UNITS];

  serializer_correction #(.N_LANES(N_LANES), .UNITS(N_UNITS)) u_ser (
    .clk, .rst_n, .cfg,
    .lane_valid, .lane_word,
    .out_valid (ph_valid),
    .out_ph    (ph),
    .lane_drops
  );

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    computation_unit #(
      .HIDDEN(HIDDEN), .FC_HIDDEN(FC_HIDDEN), .NPIX(NPIX), .FIFO_DEPTH(FIFO_DEPTH)
    ) u_cu (
      .clk, .rst_n, .cfg,
      .ph_valid      (ph_valid[u]),
      .ph,
      .frame_end,
      .out_valid     (u_valid[u]),
      .out_ready     (u_ready[u]),
      .out_data      (u_data[u]),
      .ph_accepted   (u_acc[u]),
      .ph_dropped    (u_drop[u]),
      .upd_done      (u_upd[u]),
      .readout_active(readout_active[u]),
      .readout_done  (u_rdone[u])
    );
  end

  io_arbiter #(.UNITS(N_UNITS)) u_io (
    .clk, .rst_n,
    .in_valid (u_valid),
    .in_ready (u_ready),
    .in_data  (u_data),
    .out_valid, .out_ready, .out_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      photons_accepted     <= '0;
      photons_dropped_busy <= '0;
      states_updated       <= '0;
      readouts_done        <= '0;
    end else begin
      photons_accepted     <= photons_accepted     + 32'($countones(u_acc));
      photons_dropped_busy <= photons_dropped_busy + 32'($countones(u_drop));
      states_updated       <= states_updated       + 32'($countones(u_upd));
      readouts_done        <= readouts_done        + 32'($countones(u_rdone));
    end
  end

endmodule
