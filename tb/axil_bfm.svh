// axil_bfm.svh: AXI4-Lite master tasks for the testbenches. Included inside
// a testbench module that declares clk and s_axil_* signals of width AW.
// Each task waits for the handshake and then for the response.

task automatic axil_write(input logic [AW-1:0] addr, input logic [31:0] data,
                          input logic [3:0] strb, output logic [1:0] resp);
  int guard = 0;
  s_axil_awaddr = addr; s_axil_awvalid = 1;
  s_axil_wdata = data;  s_axil_wstrb = strb; s_axil_wvalid = 1;
  s_axil_bready = 1;
  do begin @(posedge clk); guard++; end while (!s_axil_awready && guard < 100);
  #1; s_axil_awvalid = 0; s_axil_wvalid = 0;
  while (!s_axil_bvalid && guard < 200) begin @(posedge clk); #1; guard++; end
  resp = s_axil_bresp;
  @(posedge clk); #1; s_axil_bready = 0;
endtask

task automatic axil_read(input logic [AW-1:0] addr, output logic [31:0] data);
  int guard = 0;
  s_axil_araddr = addr; s_axil_arvalid = 1; s_axil_rready = 1;
  do begin @(posedge clk); guard++; end while (!s_axil_arready && guard < 100);
  #1; s_axil_arvalid = 0;
  while (!s_axil_rvalid && guard < 200) begin @(posedge clk); #1; guard++; end
  data = s_axil_rdata;
  @(posedge clk); #1; s_axil_rready = 0;
endtask

task automatic axil_idle();
  s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0;
  s_axil_arvalid = 0; s_axil_rready = 0;
  s_axil_awaddr = '0; s_axil_araddr = '0; s_axil_wdata = '0; s_axil_wstrb = '0;
endtask
