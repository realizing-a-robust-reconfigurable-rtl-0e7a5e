// axi_lite_master_if: AXI4-Lite signal bundle with master-side tasks, used by
// the testbenches to play the processor.
//
// write() and read() perform one transaction each. Signals change only on
// the falling clock edge, and ready/valid are looked at 1 ns after it, once
// the slave's combinational outputs have settled, so the master never races
// the slave's registers. The optional stall arguments hold BREADY / RREADY low for that many cycles
// after the response appears, to exercise the slave's hold rules.
interface axi_lite_master_if #(
  parameter int unsigned AW = 8
) (
  input logic clk
);
  timeunit 1ns; timeprecision 1ps;

  logic [AW-1:0] awaddr;
  logic          awvalid;
  logic          awready;
  logic [31:0]   wdata;
  logic [3:0]    wstrb;
  logic          wvalid;
  logic          wready;
  logic [1:0]    bresp;
  logic          bvalid;
  logic          bready;
  logic [AW-1:0] araddr;
  logic          arvalid;
  logic          arready;
  logic [31:0]   rdata;
  logic [1:0]    rresp;
  logic          rvalid;
  logic          rready;

  task automatic init();
    awaddr = '0; awvalid = 1'b0; wdata = '0; wstrb = '0; wvalid = 1'b0;
    bready = 1'b0; araddr = '0; arvalid = 1'b0; rready = 1'b0;
  endtask

  task automatic write(input logic [AW-1:0] a, input logic [31:0] d,
                       output logic [1:0] resp,
                       input logic [3:0] strb = 4'hF, input int stall = 0);
    @(negedge clk);
    awaddr = a; awvalid = 1'b1; wdata = d; wstrb = strb; wvalid = 1'b1;
    #1;  // let the slave's combinational ready settle
    while (!(awready && wready)) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(negedge clk);
    repeat (stall) @(negedge clk);
    bready = 1'b1;
    resp = bresp;
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic read(input logic [AW-1:0] a, output logic [31:0] d,
                      output logic [1:0] resp, input int stall = 0);
    @(negedge clk);
    araddr = a; arvalid = 1'b1;
    #1;
    while (!arready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(negedge clk);
    repeat (stall) @(negedge clk);
    rready = 1'b1;
    d = rdata; resp = rresp;
    @(negedge clk);
    rready = 1'b0;
  endtask
endinterface
