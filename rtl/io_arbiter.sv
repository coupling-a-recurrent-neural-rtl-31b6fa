// io_arbiter -- the IO block: merges the result FIFOs of the computation
// units into one stream towards the host link.
//
// A round-robin arbiter takes one result per cycle from the units whose
// FIFO is non-empty and loads it into a single output register, adding the
// unit number as the two upper bits of the pixel id, so the host receives
// {sensor pixel id, photon count, lifetime}. The output follows a
// valid/ready handshake: out_data holds while out_valid is high and
// out_ready low. A new result is loaded whenever the register is empty or
// being emptied, so the stream carries one result per cycle at full rate.
// The design names this block and gives the host data rate it leads to;
// the arbitration and the record format are this design's choices (the
// 16-bit lifetime and 8-bit count give the 24 bits per pixel that the
// published 240 kb/s at 10 frames/s of 32x32 pixels works out to).
// The assertion below samples rst_n synchronously (disable iff) while the
// flip-flops use it as an asynchronous reset; verilator reports this as
// SYNCASYNCNET, which is expected and harmless.
module io_arbiter
  import flim_pkg::*;
#(
  parameter int UNITS = N_UNITS,
  localparam int UW = (UNITS > 1) ? $clog2(UNITS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [UNITS-1:0] in_valid,
  output logic [UNITS-1:0] in_ready,
  input  local_result_t in_data [UNITS],
  output logic          out_valid,
  input  logic          out_ready,
  output result_t       out_data
);

  logic [UW-1:0] rr_ptr, sel;
  logic          sel_any, load;

  logic [UW-1:0] idx;

  always_comb begin
    sel_any = 1'b0;
    sel     = '0;
    idx     = '0;
    for (int i = 0; i < UNITS; i++) begin
      idx = UW'((32'(rr_ptr) + 32'(i)) % 32'(UNITS));
      if (!sel_any && in_valid[idx]) begin
        sel_any = 1'b1;
        sel     = UW'(idx);
      end
    end
    load     = sel_any && (!out_valid || out_ready);
    in_ready = '0;
    if (load) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rr_ptr    <= '0;
    end else begin
      if (load) begin
        out_valid <= 1'b1;
        rr_ptr    <= (sel == UW'(UNITS-1)) ? '0 : sel + 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load) begin
      out_data.pixel    <= PIX_ID_W'({sel, in_data[sel].pixel});
      out_data.count    <= in_data[sel].count;
      out_data.lifetime <= in_data[sel].lifetime;
    end
  end

  // valid/ready rule: a result offered and not taken stays unchanged
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
