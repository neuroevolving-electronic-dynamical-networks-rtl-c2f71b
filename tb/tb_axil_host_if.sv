// tb_axil_host_if: AXI4-Lite host interface against a model of the PE array
// (a word memory answering one cycle after nb_addr) and a model controller
// whose busy/done the test sets. Checks control-register reads and writes,
// the start and halt pulses, the sticky done bit, neuron-space write and
// read-back, and the SLVERR refusals (partial strobe, write while busy).
module tb_axil_host_if;
  localparam int AW = 12;
  localparam int NB = AW - 3;

  logic clk = 0, rst_n = 0;
  logic [AW-1:0] s_axil_awaddr, s_axil_araddr;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0] s_axil_wstrb;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready;
  logic start, halt, busy = 0, done = 0, done_flag;
  logic [31:0] steps, step_cnt = 32'd77, cycle_cnt = 32'd1234;
  logic nb_we;
  logic [NB-1:0] nb_addr;
  logic [31:0] nb_wdata, nb_rdata;
  int checks = 0, failures = 0;
  int n_start = 0, n_halt = 0;

  axil_host_if #(.ADDR_W(AW), .NUM_PE(9), .N(3)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] mem [2**NB];
  always_ff @(posedge clk) begin
    if (nb_we) mem[nb_addr] <= nb_wdata;
    nb_rdata <= mem[nb_addr];
    if (start) n_start++;
    if (halt)  n_halt++;
  end

  `include "axil_bfm.svh"

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  function automatic logic [AW-1:0] ctl(int idx);  return AW'(idx * 4); endfunction
  function automatic logic [AW-1:0] nsp(int word); return {1'b1, NB'(word), 2'b00}; endfunction

  initial begin
    #2_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r; logic [31:0] d;
    logic [31:0] ref_mem [2**NB];
    axil_idle();
    for (int i = 0; i < 2**NB; i++) mem[i] = 0;
    for (int i = 0; i < 2**NB; i++) ref_mem[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    // control registers
    axil_write(ctl(2), 32'd500, 4'hF, r); chk("steps wr resp", r, 0);
    axil_read(ctl(2), d);  chk("steps rd", d, 500);
    chk("steps out", steps, 500);
    axil_read(ctl(3), d);  chk("cycles", d, 1234);
    axil_read(ctl(4), d);  chk("stepcnt", d, 77);
    axil_read(ctl(5), d);  chk("info", d, {16'd9, 16'd3});
    axil_read(ctl(1), d);  chk("status idle", d, 0);
    // start pulse and done flag
    axil_write(ctl(0), 32'h1, 4'hF, r); chk("start resp", r, 0);
    chk("one start", n_start, 1);
    busy = 1;
    axil_read(ctl(1), d);  chk("status busy", d, 1);
    // neuron-space write while busy is refused
    axil_write(nsp(5), 32'hDEAD, 4'hF, r); chk("busy wr slverr", r, 2);
    axil_read(nsp(5), d);  chk("refused write left memory alone", d, 0);
    chk("model memory untouched", mem[5], 0);
    // start while busy ignored, halt passes
    axil_write(ctl(0), 32'h3, 4'hF, r);
    chk("no second start", n_start, 1);
    chk("halt pulse", n_halt, 1);
    @(posedge clk); #1; busy = 0; done = 1; @(posedge clk); #1; done = 0;
    axil_read(ctl(1), d);  chk("status done", d, 2);
    axil_read(ctl(1), d);  chk("done sticky", d, 2);
    chk("done_flag out", done_flag, 1);
    axil_write(ctl(0), 32'h1, 4'hF, r);
    axil_read(ctl(1), d);  chk("done cleared by start", d, 0);
    // partial strobe refused
    axil_write(ctl(2), 32'd9, 4'h3, r); chk("strb slverr", r, 2);
    axil_read(ctl(2), d);  chk("steps kept", d, 500);
    // neuron space: random writes and reads
    for (int t = 0; t < 300; t++) begin
      int a; logic [31:0] v;
      a = int'($urandom_range(0, 2**NB - 1)); v = $urandom;
      axil_write(nsp(a), v, 4'hF, r); chk("nsp wr resp", r, 0);
      ref_mem[a] = v;
      a = int'($urandom_range(0, 2**NB - 1));
      axil_read(nsp(a), d); chk("nsp rd", d, ref_mem[a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
