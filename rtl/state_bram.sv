// state_bram -- hidden-state memory of one computation unit.
//
// Holds one word per pixel of the unit (256 pixels for a 32x8 quarter of
// the sensor). Each word packs the pixel's GRU hidden vector (32 x 16 bits)
// and its 8-bit photon count, 520 bits in all.
// Port A is read/write and belongs to the GRU core, which reads a state,
// updates it and writes it back (the unit also clears words through it);
// port B is read-only and belongs to the FCNN core, which reads the final
// states after integration. This matches
// the arrows of the unit's block diagram (GRU <-> BRAM, BRAM -> FCNN).
// Both reads are synchronous: data appears the cycle after the enable,
// as in an FPGA block RAM. A read and a write of the same address on
// port A in one cycle return the old word (read-first).
// The memory itself has no reset; the computation unit clears it after
// reset through port A.
module state_bram #(
  parameter int WIDTH = 520,
  parameter int DEPTH = 256,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A: GRU core
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B: FCNN core
  input  logic             b_en,
  input  logic [AW-1:0]    b_addr,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
