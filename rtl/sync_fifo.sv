// sync_fifo -- single-clock FIFO that buffers the lifetime results of one
// computation unit on their way to the IO block.
//
// The FCNN core pushes one result per pixel; the IO block pops them.
// Push side: in_valid/in_ready, pop side: out_valid/out_ready; a word moves
// when valid and ready are both high at a clock edge. out_data shows the
// head of the queue combinationally (first-word fall-through), so a word
// pushed at one edge can be popped at the next. The depth (default 16) is
// this design's choice; the FIFO only has to absorb the gap between the
// FCNN producing a result every few tens of cycles and the IO block
// serving four units in turn.
// The assertion below samples rst_n synchronously (disable iff) while the
// flip-flops use it as an asynchronous reset; verilator reports this as
// SYNCASYNCNET, which is expected and harmless.
module sync_fifo #(
  parameter int WIDTH = 34,
  parameter int DEPTH = 16,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      level
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      cnt;
  logic             push, pop;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd_ptr];
  assign level     = cnt;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + AW'(1);
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + AW'(1);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // a full FIFO must not be written, an empty one not read
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   cnt <= (AW+1)'(DEPTH));

endmodule
