// safeti_axi_master: AMBA AXI4 master interface of a SafeTI.
//
// Takes transfer commands (start address, BEATS+1 words, read or write) on a
// valid/ready handshake and performs them as 32-bit INCR bursts. A command is
// split into bursts of at most 256 beats that never cross a 4 KB boundary,
// as AXI4 requires. Up to MAX_OUT bursts may be outstanding, so address and
// data phases of successive bursts overlap and, with a slave that keeps its
// ready signals high, the data channel carries one beat per cycle. The next
// command is accepted in the cycle the last burst of the current one is
// issued.
//
// Write bursts: each AW handshake pushes (address, length) into a queue that
// feeds the W channel, so write data never precedes its address. Write data
// is safeti_pkg::wdata_of of the beat address, all strobes set. Read data is
// discarded (RREADY and BREADY are always 1). A SLVERR/DECERR response counts
// on err_inc; beat_inc counts accepted W beats plus received R beats (0..2
// per cycle). `idle` is high when nothing is held or outstanding. All
// transactions use the ID parameter, so responses come back in order.
//
// The AXI protocol is the paper's; burst splitting, the outstanding limit and
// the channel subset (no LOCK, CACHE, PROT, QOS, USER) are this design's.
// RDATA and the response IDs are inputs for completeness and are unused.
module safeti_axi_master
  import safeti_pkg::*;
#(
  parameter int unsigned MAX_OUT = 8,
  parameter int unsigned ID_W    = 4,
  parameter logic [ID_W-1:0] ID  = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  output logic              idle,
  output logic [1:0]        beat_inc,
  output logic [1:0]        err_inc,
  // AXI4 master: write address
  output logic [ID_W-1:0]   awid,
  output logic [ADDR_W-1:0] awaddr,
  output logic [7:0]        awlen,
  output logic [2:0]        awsize,
  output logic [1:0]        awburst,
  output logic              awvalid,
  input  logic              awready,
  // write data
  output logic [DATA_W-1:0] wdata,
  output logic [DATA_W/8-1:0] wstrb,
  output logic              wlast,
  output logic              wvalid,
  input  logic              wready,
  // write response
  input  logic [ID_W-1:0]   bid,
  input  logic [1:0]        bresp,
  input  logic              bvalid,
  output logic              bready,
  // read address
  output logic [ID_W-1:0]   arid,
  output logic [ADDR_W-1:0] araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  output logic              arvalid,
  input  logic              arready,
  // read data
  input  logic [ID_W-1:0]   rid,
  input  logic [DATA_W-1:0] rdata,
  input  logic [1:0]        rresp,
  input  logic              rlast,
  input  logic              rvalid,
  output logic              rready
);

  localparam int unsigned CNT_W = $clog2(MAX_OUT + 1);
  localparam int unsigned PTR_W = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1;

  // command being split into bursts
  logic              c_active, c_write;
  logic [ADDR_W-1:0] c_addr;
  logic [16:0]       c_rem;          // beats left, 1..65536
  logic [16:0]       to_4k, blen;    // beats to the 4 KB boundary, burst beats
  logic              can_issue, a_fire, last_burst;
  logic [CNT_W-1:0]  out_cnt;

  // W channel queue
  logic [ADDR_W-1:0] wq_addr [MAX_OUT];
  logic [7:0]        wq_len  [MAX_OUT];
  logic [PTR_W-1:0]  wq_wr, wq_rd;
  logic [CNT_W-1:0]  wq_cnt;
  logic [7:0]        w_beat;
  logic              w_fire, w_end, r_fire, r_end, b_fire;

  always_comb begin
    to_4k = 17'd1024 - 17'(c_addr[11:2]);
    blen  = c_rem;
    if (blen > 17'd256) blen = 17'd256;
    if (blen > to_4k)   blen = to_4k;
  end

  assign can_issue  = c_active && (32'(out_cnt) < MAX_OUT) &&
                      (!c_write || 32'(wq_cnt) < MAX_OUT);
  assign arvalid    = can_issue && !c_write;
  assign awvalid    = can_issue && c_write;
  assign a_fire     = (arvalid && arready) || (awvalid && awready);
  assign last_burst = (c_rem == blen);
  assign cmd_ready  = !c_active || (a_fire && last_burst);

  assign awid    = ID;
  assign awaddr  = c_addr;
  assign awlen   = 8'(blen - 17'd1);
  assign awsize  = 3'b010;
  assign awburst = 2'b01;
  assign arid    = ID;
  assign araddr  = c_addr;
  assign arlen   = 8'(blen - 17'd1);
  assign arsize  = 3'b010;
  assign arburst = 2'b01;

  assign wvalid = (wq_cnt != '0);
  assign wlast  = (w_beat == wq_len[wq_rd]);
  assign wdata  = wdata_of(wq_addr[wq_rd] + ADDR_W'({w_beat, 2'b00}));
  assign wstrb  = '1;
  assign w_fire = wvalid && wready;
  assign w_end  = w_fire && wlast;

  assign rready = 1'b1;
  assign bready = 1'b1;
  assign r_fire = rvalid;
  assign r_end  = rvalid && rlast;
  assign b_fire = bvalid;

  assign beat_inc = 2'(w_fire) + 2'(r_fire);
  assign err_inc  = 2'(r_fire && rresp[1]) + 2'(b_fire && bresp[1]);
  assign idle     = !c_active && out_cnt == '0 && wq_cnt == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_active <= 1'b0;
      c_write  <= 1'b0;
      c_addr   <= '0;
      c_rem    <= '0;
      out_cnt  <= '0;
      wq_wr    <= '0;
      wq_rd    <= '0;
      wq_cnt   <= '0;
      w_beat   <= '0;
    end else begin
      if (a_fire) begin
        c_addr <= c_addr + ADDR_W'({blen, 2'b00});
        c_rem  <= c_rem - blen;
        if (last_burst) c_active <= 1'b0;
      end
      if (cmd_valid && cmd_ready) begin
        c_active <= 1'b1;
        c_write  <= cmd.write;
        c_addr   <= cmd.addr;
        c_rem    <= 17'(cmd.beats_m1) + 17'd1;
      end
      out_cnt <= out_cnt + CNT_W'(a_fire) - CNT_W'(r_end) - CNT_W'(b_fire);
      // W queue
      if (awvalid && awready) begin
        wq_addr[wq_wr] <= c_addr;
        wq_len[wq_wr]  <= awlen;
        wq_wr <= (32'(wq_wr) == MAX_OUT - 1) ? '0 : wq_wr + 1'b1;
      end
      if (w_end) wq_rd <= (32'(wq_rd) == MAX_OUT - 1) ? '0 : wq_rd + 1'b1;
      wq_cnt <= wq_cnt + CNT_W'(awvalid && awready) - CNT_W'(w_end);
      if (w_end)       w_beat <= '0;
      else if (w_fire) w_beat <= w_beat + 8'd1;
    end
  end

  // AXI rule: a valid address stays valid and unchanged until it is accepted.
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              arvalid && !arready |=> arvalid && $stable(araddr) && $stable(arlen));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              awvalid && !awready |=> awvalid && $stable(awaddr) && $stable(awlen));
  a_w_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                              wvalid && !wready |=> wvalid && $stable(wdata) && $stable(wlast));

endmodule
