// tb_system_bus: self-checking test of the system bus in three
// configurations: fully connected with contiguous banks, fully connected with
// interleaved banks, and one-at-a-time. Random traffic checks routing and
// data (tb_bus_env); the streaming phase checks the bandwidth: three masters
// streaming to three different slaves move three words per cycle through the
// fully connected bus and one word per cycle through the one-at-a-time bus.
module tb_system_bus;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int c [3], f [3], mx [3], g [3];
  logic d [3];

  tb_bus_env #(.FC(1'b1), .IL(1'b0)) e_fc (.clk, .rst_n, .checks(c[0]), .failures(f[0]),
                                           .max_grants(mx[0]), .phase2_grants(g[0]), .done(d[0]));
  tb_bus_env #(.FC(1'b1), .IL(1'b1)) e_il (.clk, .rst_n, .checks(c[1]), .failures(f[1]),
                                           .max_grants(mx[1]), .phase2_grants(g[1]), .done(d[1]));
  tb_bus_env #(.FC(1'b0), .IL(1'b0)) e_oa (.clk, .rst_n, .checks(c[2]), .failures(f[2]),
                                           .max_grants(mx[2]), .phase2_grants(g[2]), .done(d[2]));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2]);
    for (int i = 0; i < 3; i++) begin
      checks += c[i]; failures += f[i];
      check(c[i] > 1000, $sformatf("config %0d: enough traffic (%0d)", i, c[i]));
    end
    // 40 streaming cycles: 3 words per cycle fully connected, 1 one-at-a-time
    check(mx[0] == 3 && g[0] >= 3 * 40 - 6, $sformatf("fully connected: %0d grants, peak %0d", g[0], mx[0]));
    check(mx[1] == 3 && g[1] >= 3 * 40 - 6, $sformatf("interleaved: %0d grants, peak %0d", g[1], mx[1]));
    check(mx[2] == 1 && g[2] >= 40 - 2,     $sformatf("one-at-a-time: %0d grants, peak %0d", g[2], mx[2]));
    $display("bandwidth words/cycle: fc %0d/40 il %0d/40 oaat %0d/40", g[0], g[1], g[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
