// axi_slave_model: behavioural AXI4 slave used by the testbenches.
//
// Stands in for the AXI interconnect and memory seen by a SafeTI. AWREADY,
// WREADY, ARREADY and RVALID/BVALID are asserted at random (ready_pct percent
// of cycles) to create back-pressure; responses are returned in order. A
// burst that starts at ERR_ADDR gets SLVERR. Every R beat is reported on
// obs_r_* and every accepted W beat on obs_w_* (address and data). The
// model checks the master: INCR bursts of 32-bit beats, no burst across a
// 4 KB boundary, WLAST exactly on the last beat, and valid signals that are
// not withdrawn or changed before their handshake; each violation increments
// `violations`. Not synthesizable.
module axi_slave_model #(
  parameter logic [31:0] ERR_ADDR  = 32'hFFFF_FFFC
) (
  input  int unsigned ready_pct,
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic [2:0]  awsize,
  input  logic [1:0]  awburst,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic [2:0]  arsize,
  input  logic [1:0]  arburst,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  output logic        obs_r_valid,
  output logic [31:0] obs_r_addr,
  output logic        obs_w_valid,
  output logic [31:0] obs_w_addr,
  output logic [31:0] obs_w_data,
  output int unsigned violations,
  output int unsigned stall_cycles
);
  typedef struct { logic [31:0] addr; int unsigned len; } burst_t;
  burst_t rq[$], wq[$];
  logic   bq[$];
  int unsigned r_beat, w_beat;
  logic prev_arv, prev_awv, prev_arr, prev_awr;
  logic [31:0] prev_araddr, prev_awaddr;

  function automatic bit crosses_4k(input logic [31:0] a, input logic [7:0] len);
    return (a[11:0] + (32'(len) << 2)) > 32'hFFF;
  endfunction

  always_comb begin
    rdata = '0; rresp = 2'b00; rlast = 1'b0; bresp = 2'b00;
    obs_r_addr = '0; obs_w_addr = '0;
    if (rq.size() > 0) begin
      rdata = rq[0].addr + r_beat * 4;
      rresp = (rq[0].addr == ERR_ADDR) ? 2'b10 : 2'b00;
      rlast = (r_beat == rq[0].len);
      obs_r_addr = rq[0].addr + r_beat * 4;
    end
    if (bq.size() > 0) bresp = bq[0] ? 2'b10 : 2'b00;
    if (wq.size() > 0) obs_w_addr = wq[0].addr + w_beat * 4;
    obs_r_valid = rvalid && rready;
    obs_w_valid = wvalid && wready;
    obs_w_data  = wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awready <= 1'b0; wready <= 1'b0; arready <= 1'b0; rvalid <= 1'b0; bvalid <= 1'b0;
      r_beat <= 0; w_beat <= 0; violations <= 0; stall_cycles <= 0;
      prev_arv <= 1'b0; prev_awv <= 1'b0; prev_arr <= 1'b0; prev_awr <= 1'b0;
      prev_araddr <= '0; prev_awaddr <= '0;
      rq.delete(); wq.delete(); bq.delete();
    end else begin
      // protocol checks on the address channels
      if (prev_arv && !prev_arr && (!arvalid || araddr != prev_araddr)) violations <= violations + 1;
      if (prev_awv && !prev_awr && (!awvalid || awaddr != prev_awaddr)) violations <= violations + 1;
      prev_arv <= arvalid; prev_arr <= arready; prev_araddr <= araddr;
      prev_awv <= awvalid; prev_awr <= awready; prev_awaddr <= awaddr;
      if ((arvalid && !arready) || (awvalid && !awready) || (wvalid && !wready))
        stall_cycles <= stall_cycles + 1;
      // AR
      if (arvalid && arready) begin
        if (arsize != 3'b010 || arburst != 2'b01 || crosses_4k(araddr, arlen))
          violations <= violations + 1;
        rq.push_back('{addr: araddr, len: 32'(arlen)});
      end
      // R
      if (rvalid && rready) begin
        if (rlast) begin
          void'(rq.pop_front());
          r_beat <= 0;
        end else r_beat <= r_beat + 1;
      end
      // AW
      if (awvalid && awready) begin
        if (awsize != 3'b010 || awburst != 2'b01 || crosses_4k(awaddr, awlen))
          violations <= violations + 1;
        wq.push_back('{addr: awaddr, len: 32'(awlen)});
      end
      // W
      if (wvalid && wready) begin
        if (wq.size() == 0) violations <= violations + 1;
        else begin
          if (wlast != (w_beat == wq[0].len)) violations <= violations + 1;
          if (w_beat == wq[0].len) begin
            bq.push_back(wq[0].addr == ERR_ADDR);
            void'(wq.pop_front());
            w_beat <= 0;
          end else w_beat <= w_beat + 1;
        end
      end
      // B
      if (bvalid && bready) void'(bq.pop_front());
      // random ready / valid for the next cycle
      awready <= ($urandom_range(99, 0) < ready_pct);
      arready <= ($urandom_range(99, 0) < ready_pct);
      wready  <= ($urandom_range(99, 0) < ready_pct);
      if (!rvalid || rready)
        rvalid <= (rq.size() > 0) && ($urandom_range(99, 0) < ready_pct);
      if (!bvalid || bready)
        bvalid <= (bq.size() > 0) && ($urandom_range(99, 0) < ready_pct);
    end
  end
endmodule
