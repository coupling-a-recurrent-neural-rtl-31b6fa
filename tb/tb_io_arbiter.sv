// tb_io_arbiter -- self-checking test of the IO block.
//
// Four sources, each a queue of random results with random valid timing,
// feed the arbiter; the output is drained with random back-pressure. Each
// output must be the head of the queue of the unit named by its two upper
// pixel-id bits (per-unit order kept), must stay unchanged while
// out_valid is high and out_ready low, and all results must arrive. With
// all sources busy and out_ready high the output must carry one result per
// cycle, taking the units in turn.
module tb_io_arbiter;
  import flim_pkg::*;

  localparam int U = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  logic [U-1:0] in_valid, in_ready;
  local_result_t in_data [U];
  logic out_valid, out_ready;
  result_t out_data;
  int checks = 0, failures = 0;

  io_arbiter #(.UNITS(U)) dut (.*);

  local_result_t src [U][$];
  local_result_t sent [U][$];
  int total = 0, got = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: present head of queue when "active"
  logic [U-1:0] active;
  always_comb
    for (int u = 0; u < U; u++) begin
      in_valid[u] = active[u] && (src[u].size() > 0);
      in_data[u]  = (src[u].size() > 0) ? src[u][0] : '0;
    end

  initial begin
    result_t held;
    logic    held_v;
    int      full_rate, last_unit;
    active = '0; out_ready = 0;
    for (int u = 0; u < U; u++)
      for (int i = 0; i < 200; i++) begin
        local_result_t r;
        r.pixel = 8'(i); r.count = 8'($urandom()); r.lifetime = fx_t'($urandom());
        src[u].push_back(r);
        total++;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    held_v = 0;
    full_rate = 0; last_unit = -1;
    for (int n = 0; n < 5000 && got < total; n++) begin
      logic [U-1:0] act_n;
      logic rdy_n;
      act_n = (n < 40) ? '1 : 4'($urandom());
      rdy_n = (n < 40) ? 1'b1 : 1'($urandom_range(2) != 0);
      active <= act_n; out_ready <= rdy_n;
      #1;   // settle, then sample what the coming edge will see
      begin
        logic [U-1:0] take;
        logic         o_v, o_r;
        result_t      o_d;
        take = in_valid & in_ready;
        o_v = out_valid; o_r = out_ready; o_d = out_data;
        @(posedge clk);
        #1;
        if (held_v) check(o_v && o_d == held, "output held under back-pressure");
        held_v = o_v && !o_r;
        held   = o_d;
        if (o_v && o_r) begin
          int u;
          u = int'(o_d.pixel[9:8]);
          check(sent[u].size() > 0 && o_d.pixel[7:0] == sent[u][0].pixel &&
                o_d.count == sent[u][0].count && o_d.lifetime == sent[u][0].lifetime,
                $sformatf("result order/content unit %0d", u));
          if (sent[u].size() > 0) void'(sent[u].pop_front());
          got++;
          if (n >= 5 && n < 40) begin
            full_rate++;
            if (last_unit >= 0) check(u == (last_unit + 1) % U, "round robin order");
          end
          last_unit = u;
        end
        for (int u = 0; u < U; u++)
          if (take[u]) sent[u].push_back(src[u].pop_front());
      end
    end
    check(got == total, $sformatf("delivered %0d of %0d", got, total));
    check(full_rate == 35, $sformatf("full-rate results %0d of 35", full_rate));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
