// safeti_axi: one enhanced SafeTI with an AMBA AXI4 data port.
//
// The same SafeTI as safeti_ahb (APB-programmed descriptor buffer and
// control registers, pipelined injector), with the AHB master replaced by
// safeti_axi_master. Only the bus interface differs: the injector's command
// handshake is independent of the bus protocol, which is how one injector
// design serves both buses of the SoC.
//
// This arrangement is the paper's enhanced SafeTI ported to AXI; the register
// map, descriptor format, burst policy and all sizes are this design's.
module safeti_axi
  import safeti_pkg::*;
#(
  parameter int unsigned N_DESC  = 16,
  parameter int unsigned MAX_OUT = 8,
  parameter int unsigned ID_W    = 4,
  parameter logic [ID_W-1:0] ID  = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  // APB slave (configuration)
  input  logic              psel,
  input  logic              penable,
  input  logic [APB_AW-1:0] paddr,
  input  logic              pwrite,
  input  logic [31:0]       pwdata,
  output logic [31:0]       prdata,
  output logic              pready,
  output logic              pslverr,
  // AXI4 master (traffic)
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

  localparam int unsigned IDX_W = (N_DESC > 1) ? $clog2(N_DESC) : 1;

  logic                     dbuf_wr_en, dbuf_rd_en, fetch_en;
  logic [IDX_W-1:0]         dbuf_idx, fetch_idx;
  logic [1:0]               dbuf_word;
  logic [31:0]              dbuf_wr_data, dbuf_rd_data;
  logic [DESC_WORDS*32-1:0] fetch_data;
  logic                     start, loop, abort, busy, done, desc_inc;
  logic [1:0]               beat_inc, err_inc;
  logic                     cmd_valid, cmd_ready, master_idle;
  cmd_t                     cmd;

  safeti_ctrl_regs #(.N_DESC(N_DESC)) u_regs (
    .clk, .rst_n, .psel, .penable, .paddr, .pwrite, .pwdata, .prdata, .pready, .pslverr,
    .dbuf_wr_en, .dbuf_idx, .dbuf_word, .dbuf_wr_data, .dbuf_rd_en, .dbuf_rd_data,
    .start, .loop, .abort, .busy, .done, .desc_inc, .beat_inc, .err_inc
  );

  safeti_desc_buf #(.N_DESC(N_DESC)) u_dbuf (
    .clk,
    .wr_en(dbuf_wr_en), .wr_idx(dbuf_idx), .wr_word(dbuf_word), .wr_data(dbuf_wr_data),
    .ard_en(dbuf_rd_en), .ard_idx(dbuf_idx), .ard_word(dbuf_word), .ard_data(dbuf_rd_data),
    .fetch_en, .fetch_idx, .fetch_data
  );

  safeti_injector #(.N_DESC(N_DESC)) u_inj (
    .clk, .rst_n, .start, .loop, .abort, .busy, .done, .desc_done(desc_inc),
    .fetch_en, .fetch_idx, .fetch_data, .cmd_valid, .cmd_ready, .cmd, .master_idle
  );

  safeti_axi_master #(.MAX_OUT(MAX_OUT), .ID_W(ID_W), .ID(ID)) u_axi (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .idle(master_idle), .beat_inc, .err_inc,
    .awid, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bid, .bresp, .bvalid, .bready,
    .arid, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rid, .rdata, .rresp, .rlast, .rvalid, .rready
  );

endmodule
