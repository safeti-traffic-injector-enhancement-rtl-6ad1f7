// safeti_ahb_master: AMBA AHB master interface of a SafeTI.
//
// Takes transfer commands (start address, BEATS+1 words, read or write) on a
// valid/ready handshake and performs them as 32-bit incrementing transfers on
// an AHB-Lite style master port. AHB pipelines the address phase of one beat
// with the data phase of the previous one; this interface keeps that pipeline
// full across commands: it accepts the next command in the cycle the last
// address phase of the current one is accepted, so back-to-back commands give
// one beat per cycle with zero wait states.
//
// Each command starts an INCR burst with NONSEQ; following beats are SEQ,
// except that a beat on a 1 KB boundary starts a new INCR burst with NONSEQ,
// since AHB bursts must not cross 1 KB. Write data is the function
// safeti_pkg::wdata_of of the beat address; read data is discarded, since the
// purpose of the traffic is the interference it causes. An ERROR response is
// counted on err_inc and the transfer continues. beat_inc pulses for every
// completed data phase. `idle` is high when no address or data phase is
// outstanding.
//
// Bus arbitration is left to the interconnect (no HBUSREQ/HGRANT), HPROT is a
// fixed data access. The AHB protocol is the paper's; the rest is this
// design's choice. HRDATA is an input for completeness and is unused.
module safeti_ahb_master
  import safeti_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // commands
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  output logic              idle,
  output logic [1:0]        beat_inc,
  output logic [1:0]        err_inc,
  // AHB master
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

  localparam logic [1:0] HTRANS_IDLE   = 2'b00;
  localparam logic [1:0] HTRANS_NONSEQ = 2'b10;
  localparam logic [1:0] HTRANS_SEQ    = 2'b11;

  // address phase
  logic              a_active, a_write, a_first;
  logic [ADDR_W-1:0] a_addr;
  logic [15:0]       a_rem;      // beats still to come after the current one
  // data phase
  logic              d_active, d_write;
  logic [ADDR_W-1:0] d_addr;

  logic a_last, cmd_fire;
  assign a_last    = (a_rem == 16'd0);
  assign cmd_ready = !a_active || (hready && a_last);
  assign cmd_fire  = cmd_valid && cmd_ready;

  assign haddr  = a_addr;
  assign hwrite = a_write;
  assign htrans = !a_active ? HTRANS_IDLE :
                  (a_first || a_addr[9:0] == 10'd0) ? HTRANS_NONSEQ : HTRANS_SEQ;
  assign hsize  = 3'b010;   // 32-bit
  assign hburst = 3'b001;   // INCR
  assign hprot  = 4'b0011;  // data, privileged, non-bufferable, non-cacheable
  assign hwdata = d_write ? wdata_of(d_addr) : '0;

  assign beat_inc = {1'b0, hready && d_active};
  assign err_inc  = {1'b0, hready && d_active && hresp};
  assign idle     = !a_active && !d_active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_active <= 1'b0;
      a_write  <= 1'b0;
      a_first  <= 1'b0;
      a_addr   <= '0;
      a_rem    <= '0;
      d_active <= 1'b0;
      d_write  <= 1'b0;
      d_addr   <= '0;
    end else begin
      if (hready) begin
        d_active <= a_active;
        d_write  <= a_write;
        d_addr   <= a_addr;
        if (a_active) begin
          if (a_last) a_active <= 1'b0;
          a_addr  <= a_addr + ADDR_W'(4);
          a_rem   <= a_rem - 16'd1;
          a_first <= 1'b0;
        end
      end
      if (cmd_fire) begin
        a_active <= 1'b1;
        a_addr   <= cmd.addr;
        a_rem    <= cmd.beats_m1;
        a_write  <= cmd.write;
        a_first  <= 1'b1;
      end
    end
  end

  // AHB rule: an address phase held by wait states does not change.
  a_ahb_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               a_active && !hready |=> a_active && $stable(haddr)
                               && $stable(htrans) && $stable(hwrite));

endmodule
