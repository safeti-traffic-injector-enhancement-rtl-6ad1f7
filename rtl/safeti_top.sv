// safeti_top: the two SafeTI modules of the SoC integration.
//
// The SoC described for this injector has two interconnects under test: an
// AHB bus shared by the processor cores and the L2 cache, and an AXI bus
// shared by the L2 cache, accelerators, an I/O bridge and the memory
// controller. One SafeTI is attached as a master to each (safeti_ahb and
// safeti_axi), and both are configured from the SoC's APB bus. The cores,
// caches, interconnects and memory are not part of this RTL: their
// connections are the ports of this module.
//
// APB: the APB bridge of the SoC decodes the address and selects one slave;
// psel[0] selects the AHB SafeTI and psel[1] the AXI SafeTI, each with its
// own 4 KB register window (map in safeti_pkg). PRDATA, PREADY and PSLVERR
// come from the selected instance.
//
// Having one SafeTI per bus and APB for both follows the paper's SoC figure;
// the slave select encoding and all sizes are this design's.
module safeti_top
  import safeti_pkg::*;
#(
  parameter int unsigned N_DESC  = 16,
  parameter int unsigned MAX_OUT = 8,
  parameter int unsigned ID_W    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // APB slave side (from the SoC APB bridge)
  input  logic [1:0]        psel,
  input  logic              penable,
  input  logic [APB_AW-1:0] paddr,
  input  logic              pwrite,
  input  logic [31:0]       pwdata,
  output logic [31:0]       prdata,
  output logic              pready,
  output logic              pslverr,
  // AHB master port of the AHB SafeTI
  output logic [ADDR_W-1:0] haddr,
  output logic [1:0]        htrans,
  output logic              hwrite,
  output logic [2:0]        hsize,
  output logic [2:0]        hburst,
  output logic [3:0]        hprot,
  output logic [DATA_W-1:0] hwdata,
  input  logic              hready,
  input  logic              hresp,
  input  logic [DATA_W-1:0] hrdata,
  // AXI4 master port of the AXI SafeTI
  output logic [ID_W-1:0]   awid,
  output logic [ADDR_W-1:0] awaddr,
  output logic [7:0]        awlen,
  output logic [2:0]        awsize,
  output logic [1:0]        awburst,
  output logic              awvalid,
  input  logic              awready,
  output logic [DATA_W-1:0] wdata,
  output logic [DATA_W/8-1:0] wstrb,
  output logic              wlast,
  output logic              wvalid,
  input  logic              wready,
  input  logic [ID_W-1:0]   bid,
  input  logic [1:0]        bresp,
  input  logic              bvalid,
  output logic              bready,
  output logic [ID_W-1:0]   arid,
  output logic [ADDR_W-1:0] araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  output logic              arvalid,
  input  logic              arready,
  input  logic [ID_W-1:0]   rid,
  input  logic [DATA_W-1:0] rdata,
  input  logic [1:0]        rresp,
  input  logic              rlast,
  input  logic              rvalid,
  output logic              rready
);

  logic [31:0] prdata_ahb, prdata_axi;
  logic        pready_ahb, pready_axi, pslverr_ahb, pslverr_axi;

  safeti_ahb #(.N_DESC(N_DESC)) u_safeti_ahb (
    .clk, .rst_n,
    .psel(psel[0]), .penable, .paddr, .pwrite, .pwdata,
    .prdata(prdata_ahb), .pready(pready_ahb), .pslverr(pslverr_ahb),
    .haddr, .htrans, .hwrite, .hsize, .hburst, .hprot, .hwdata, .hready, .hresp, .hrdata
  );

  safeti_axi #(.N_DESC(N_DESC), .MAX_OUT(MAX_OUT), .ID_W(ID_W)) u_safeti_axi (
    .clk, .rst_n,
    .psel(psel[1]), .penable, .paddr, .pwrite, .pwdata,
    .prdata(prdata_axi), .pready(pready_axi), .pslverr(pslverr_axi),
    .awid, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bid, .bresp, .bvalid, .bready,
    .arid, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rid, .rdata, .rresp, .rlast, .rvalid, .rready
  );

  always_comb begin
    prdata  = '0;
    pready  = 1'b1;
    pslverr = 1'b0;
    if (psel[0]) begin
      prdata = prdata_ahb; pready = pready_ahb; pslverr = pslverr_ahb;
    end else if (psel[1]) begin
      prdata = prdata_axi; pready = pready_axi; pslverr = pslverr_axi;
    end
  end

  // The APB bridge selects at most one slave.
  a_one_psel: assert property (@(posedge clk) disable iff (!rst_n) !(psel[0] && psel[1]));

endmodule
