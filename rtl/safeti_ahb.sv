// safeti_ahb: one enhanced SafeTI with an AMBA AHB data port.
//
// Software programs the descriptor buffer and the control registers through
// the APB slave port; the injector then reads the descriptors through a
// private port of the buffer and generates the programmed traffic on the AHB
// master port. Configuration therefore never travels over the bus under test
// and never passes through a cache. Blocks: safeti_ctrl_regs (APB slave and
// registers), safeti_desc_buf (descriptors), safeti_injector (fetch, decode,
// execute pipeline) and safeti_ahb_master (AHB protocol).
//
// This arrangement is the paper's enhanced SafeTI; the register map,
// descriptor format and all sizes are this design's (see safeti_pkg).
module safeti_ahb
  import safeti_pkg::*;
#(
  parameter int unsigned N_DESC = 16
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
  // AHB master (traffic)
  output logic [ADDR_W-1:0] haddr,
  output logic [1:0]        htrans,
  output logic              hwrite,
  output logic [2:0]        hsize,
  output logic [2:0]        hburst,
  output logic [3:0]        hprot,
  output logic [DATA_W-1:0] hwdata,
  input  logic              hready,
  input  logic              hresp,
  input  logic [DATA_W-1:0] hrdata
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

  safeti_ahb_master u_ahb (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .idle(master_idle), .beat_inc, .err_inc,
    .haddr, .htrans, .hwrite, .hsize, .hburst, .hprot, .hwdata, .hready, .hresp, .hrdata
  );

endmodule
