// AXI4-Lite master tasks shared by the testbenches that drive the register
// interface. Included inside a module that declares clk and the AXI signals
// awaddr, awvalid, awready, wdata, wstrb, wvalid, wready, bresp, bvalid,
// bready, araddr, arvalid, arready, rdata, rresp, rvalid, rready.
// Inputs of the slave change half a cycle away from the rising edge.

task automatic axi_write(input logic [7:0] addr, input logic [31:0] data,
                         input logic [3:0] strb, output logic [1:0] resp);
  @(negedge clk);
  awaddr = addr; awvalid = 1'b1; wdata = data; wstrb = strb; wvalid = 1'b1;
  bready = 1'b1;
  do @(posedge clk); while (!awready);
  @(negedge clk);
  awvalid = 1'b0; wvalid = 1'b0;
  while (!bvalid) @(negedge clk);
  resp = bresp;
  @(posedge clk);
  @(negedge clk);
  bready = 1'b0;
endtask

task automatic axi_read(input logic [7:0] addr, output logic [31:0] data);
  @(negedge clk);
  araddr = addr; arvalid = 1'b1; rready = 1'b1;
  do @(posedge clk); while (!arready);
  @(negedge clk);
  arvalid = 1'b0;
  while (!rvalid) @(negedge clk);
  data = rdata;
  @(posedge clk);
  @(negedge clk);
  rready = 1'b0;
endtask
