// ahb_slave_model: behavioural AHB-Lite slave used by the testbenches.
//
// Stands in for the AHB interconnect and memory seen by a SafeTI. It inserts
// a random number of wait states (0..max_wait) in each data phase, answers a
// two-cycle ERROR response to any transfer whose address equals ERR_ADDR,
// and reports every completed data phase on the obs_* outputs (address,
// direction, write data, error) in the cycle it completes. It also checks
// the master's protocol: a SEQ transfer must continue the previous one
// (same direction, address + 4, same 1 KB region) and must not follow IDLE;
// every violation increments `violations`. Not synthesizable.
module ahb_slave_model #(
  parameter logic [31:0] ERR_ADDR = 32'hFFFF_FFFC
) (
  input  int unsigned max_wait,
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [31:0] hwdata,
  output logic        hready,
  output logic        hresp,
  output logic [31:0] hrdata,
  output logic        obs_valid,
  output logic [31:0] obs_addr,
  output logic        obs_write,
  output logic [31:0] obs_wdata,
  output logic        obs_err,
  output int unsigned violations,
  output int unsigned wait_cycles
);
  logic        dp_valid, dp_write, dp_err, err_step;
  logic [31:0] dp_addr;
  int unsigned dp_wait;
  logic        prev_valid, prev_write;
  logic [31:0] prev_addr;

  assign hready    = !dp_valid || (dp_wait == 0 && (!dp_err || err_step));
  assign hresp     = dp_valid && dp_err && dp_wait == 0;
  assign hrdata    = dp_addr;
  assign obs_valid = dp_valid && hready;
  assign obs_addr  = dp_addr;
  assign obs_write = dp_write;
  assign obs_wdata = hwdata;
  assign obs_err   = hresp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dp_valid <= 1'b0; dp_write <= 1'b0; dp_err <= 1'b0; err_step <= 1'b0;
      dp_addr <= '0; dp_wait <= 0; prev_valid <= 1'b0; prev_write <= 1'b0;
      prev_addr <= '0; violations <= 0; wait_cycles <= 0;
    end else begin
      if (!hready) begin
        wait_cycles <= wait_cycles + 1;
        if (dp_wait > 0) dp_wait <= dp_wait - 1;
        else if (dp_err) err_step <= 1'b1;
      end else begin
        dp_valid <= htrans[1];
        dp_addr  <= haddr;
        dp_write <= hwrite;
        dp_wait  <= (htrans[1] && max_wait > 0) ? $urandom_range(max_wait, 0) : 0;
        dp_err   <= htrans[1] && haddr == ERR_ADDR;
        err_step <= 1'b0;
        if (htrans == 2'b11) begin
          if (!prev_valid || prev_write != hwrite || haddr != prev_addr + 4 ||
              haddr[9:0] == 10'd0)
            violations <= violations + 1;
        end
        if (htrans == 2'b01) violations <= violations + 1;  // BUSY never used
        prev_valid <= htrans[1];
        prev_addr  <= haddr;
        prev_write <= hwrite;
      end
    end
  end
endmodule
