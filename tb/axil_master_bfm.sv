// axil_master_bfm: AXI4-Lite master model for the testbenches.
//
// Drives one AXI4-Lite port from tasks: write() and read(). Signals change on
// the falling clock edge so that the design samples them stably on the
// rising edge. The address and data channels of a write can be offered with
// separate delays (in cycles) to exercise either arrival order, and the
// response can be accepted late to exercise the slave's response hold.
`timescale 1ns/1ps
module axil_master_bfm (
  input  logic        clk,
  output logic [3:0]  awaddr,
  output logic        awvalid,
  input  logic        awready,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb,
  output logic        wvalid,
  input  logic        wready,
  input  logic [1:0]  bresp,
  input  logic        bvalid,
  output logic        bready,
  output logic [3:0]  araddr,
  output logic        arvalid,
  input  logic        arready,
  input  logic [31:0] rdata,
  input  logic [1:0]  rresp,
  input  logic        rvalid,
  output logic        rready
);
  initial begin
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = '0; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  end

  task automatic send_aw(input logic [3:0] a, input int dly);
    repeat (dly) @(negedge clk);
    @(negedge clk);
    awaddr = a; awvalid = 1;
    forever begin #1; if (awready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk);
    awvalid = 0;
  endtask

  task automatic send_w(input logic [31:0] d, input logic [3:0] s, input int dly);
    repeat (dly) @(negedge clk);
    @(negedge clk);
    wdata = d; wstrb = s; wvalid = 1;
    forever begin #1; if (wready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk);
    wvalid = 0;
  endtask

  // Full write; returns the response code. b_dly cycles pass before bready.
  task automatic write(input logic [3:0] a, input logic [31:0] d,
                       input logic [3:0] s = 4'hF, input int aw_dly = 0,
                       input int w_dly = 0, input int b_dly = 0,
                       output logic [1:0] resp);
    fork
      send_aw(a, aw_dly);
      send_w(d, s, w_dly);
    join
    repeat (b_dly) @(negedge clk);
    bready = 1;
    forever begin #1; if (bvalid) break; @(negedge clk); end
    resp = bresp;
    @(posedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic read(input logic [3:0] a, input int r_dly = 0,
                      output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    araddr = a; arvalid = 1;
    forever begin #1; if (arready) break; @(negedge clk); end
    @(posedge clk);
    @(negedge clk);
    arvalid = 0;
    repeat (r_dly) @(negedge clk);
    rready = 1;
    forever begin #1; if (rvalid) break; @(negedge clk); end
    d = rdata; resp = rresp;
    @(posedge clk);
    @(negedge clk);
    rready = 0;
  endtask
endmodule
