// tb_sync_fifo -- self-checking test of the result FIFO.
//
// Random pushes and pops against a queue model: order and data of every
// word, in_ready low exactly when 16 words are held, out_valid low exactly
// when empty, and the level output.
module tb_sync_fifo;
  localparam int W = 34, D = 16;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [4:0] level;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;
  int nfull = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int bias;
      bias = (n / 1000) % 2;     // alternate filling and draining phases
      in_valid  <= 1'($urandom_range(3) > bias);
      out_ready <= 1'($urandom_range(3) <= bias);
      in_data   <= {2'($urandom()), 32'($urandom())};
      #1;
      @(posedge clk);
      // values sampled at this edge
      checks++;
      if (in_ready != (q.size() < D) || out_valid != (q.size() > 0) || level != 5'(q.size())) begin
        failures++; $display("FAIL flags n=%0d size=%0d", n, q.size());
      end
      if (q.size() == D) nfull++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("FAIL data n=%0d", n); end
        void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
