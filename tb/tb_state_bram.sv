// tb_state_bram -- self-checking test of the hidden-state block RAM.
//
// Random writes on port A with reads on both ports, compared with a
// shadow array: read data appears one cycle after the enable, a port-A
// read of the address being written returns the old word, port B sees a
// word written on port A from the next cycle on, and a disabled port keeps
// its output.
module tb_state_bram;
  localparam int W = 520, D = 256;

  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en, a_we, b_en;
  logic [7:0] a_addr, b_addr;
  logic [W-1:0] a_wdata, a_rdata, b_rdata;
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  state_bram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; a_we = 0; b_en = 0; a_addr = 0; b_addr = 0; a_wdata = '0;
    // fill
    for (int i = 0; i < D; i++) begin
      shadow[i] = rnd_word();
      a_en <= 1; a_we <= 1; a_addr <= 8'(i); a_wdata <= shadow[i];
      @(posedge clk);
    end
    for (int n = 0; n < 3000; n++) begin
      logic [W-1:0] expa, expb, olda, oldb;
      logic ae, we, be;
      logic [7:0] aa, ba;
      ae = 1'($urandom_range(1)); we = 1'($urandom_range(1)); be = 1'($urandom_range(1));
      aa = 8'($urandom_range(D-1));
      ba = (n % 4 == 0) ? aa : 8'($urandom_range(D-1));
      olda = a_rdata; oldb = b_rdata;
      expa = ae ? shadow[aa] : olda;
      expb = be ? shadow[ba] : oldb;
      a_en <= ae; a_we <= we; a_addr <= aa; a_wdata <= rnd_word();
      b_en <= be; b_addr <= ba;
      @(posedge clk);
      if (ae && we) shadow[aa] = a_wdata;
      #1;
      checks++; if (a_rdata !== expa) begin failures++; $display("FAIL port A n=%0d", n); end
      checks++; if (b_rdata !== expb) begin failures++; $display("FAIL port B n=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
