// tb_sigmoid_lut: checks the sigmoid table against sigma() computed in real
// arithmetic here, including the clamping beyond |x| >= 8 and the one-cycle
// read latency.
module tb_sigmoid_lut;
  import ctrnn_pkg::*;
  logic clk = 0, en = 1;
  state_t x;
  logic [15:0] sig;
  int checks = 0, failures = 0;

  sigmoid_lut dut (.clk, .en, .x, .sig);
  always #5 clk = ~clk;

  // Expected entry: bin of width 1/16 over [-8, 8), sigma at the bin centre.
  function automatic int expect_sig(real xr);
    int  k;
    real mid;
    k = int'($floor(xr * 16.0)) + 128;
    if (k < 0) k = 0;
    if (k > 255) k = 255;
    mid = (real'(k) - 128.0 + 0.5) / 16.0;
    return int'($floor(65535.0 / (1.0 + $exp(-mid)) + 0.5));
  endfunction

  task automatic check_x(real xr);
    x = state_t'($rtoi($floor(xr * 65536.0)));
    @(posedge clk); #1;
    checks++;
    if (int'(sig) != expect_sig(real'(x) / 65536.0)) begin
      failures++;
      $display("FAIL x=%f sig=%0d exp=%0d", xr, sig, expect_sig(real'(x) / 65536.0));
    end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = 0;
    @(posedge clk);
    check_x(0.0);  check_x(-0.01); check_x(1.0); check_x(-1.0);
    check_x(7.99); check_x(-8.0);  check_x(8.0);  check_x(20.0);
    for (int i = 0; i < 400; i++)
      check_x((real'($urandom_range(0, 40000)) - 20000.0) / 1000.0);
    check_x(-300.0);
    // latency: after x = -300 the output holds entry 0 until the next edge
    x = state_t'(32'sh0003_0000);
    #1; checks++;
    if (int'(sig) != expect_sig(-300.0)) failures++;
    @(posedge clk); #1; checks++;
    if (int'(sig) != expect_sig(3.0)) failures++;
    // hold: with en low the output keeps its value
    en = 0; x = state_t'(-32'sh0003_0000);
    @(posedge clk); #1; checks++;
    if (int'(sig) != expect_sig(3.0)) failures++;
    en = 1;
    // the table itself: sigma just above 0 is a little over one half
    checks++;
    if (expect_sig(0.0) < 32768 || expect_sig(0.0) > 34000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
