// tb_safeti_axi_master: self-checking test of the AXI4 master interface.
//
// Feeds transfer commands into safeti_axi_master in front of the behavioural
// AXI slave and compares every R beat (address) and W beat (address, data)
// with the beat lists expanded from the commands. Counts AR/AW handshakes
// against the number of bursts a command must be split into (256-beat
// maximum, no 4 KB crossing), checks a SLVERR response is counted, and
// measures the rate: with a slave that is always ready, a 600-beat read and
// a 600-beat write must each stream one beat per cycle once started.
module tb_safeti_axi_master;
  import safeti_pkg::*;
  localparam logic [31:0] ERR_A = 32'h0000_9000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, idle;
  cmd_t cmd = '0;
  logic [1:0] beat_inc, err_inc;
  logic [3:0] awid, arid, bid = '0, rid = '0;
  logic [31:0] awaddr, araddr, wdata, rdata;
  logic [7:0] awlen, arlen;
  logic [2:0] awsize, arsize;
  logic [1:0] awburst, arburst, bresp, rresp;
  logic [3:0] wstrb;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic arvalid, arready, rlast, rvalid, rready;
  int unsigned ready_pct = 60;
  logic obs_r_valid, obs_w_valid;
  logic [31:0] obs_r_addr, obs_w_addr, obs_w_data;
  int unsigned violations, stall_cycles;

  safeti_axi_master dut (.*);
  axi_slave_model #(.ERR_ADDR(ERR_A)) u_slv (.*);

  logic [31:0] exp_r[$], exp_w[$];
  longint r_cyc[$], w_cyc[$];
  int checks = 0, failures = 0, n_err = 0, n_ar = 0, n_aw = 0, exp_bursts = 0;
  longint cyc = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && obs_r_valid) begin
      r_cyc.push_back(cyc);
      if (exp_r.size() == 0) check(0, "unexpected R beat");
      else begin
        logic [31:0] e;
        e = exp_r.pop_front();
        check(obs_r_addr == e, $sformatf("R beat %h expected %h", obs_r_addr, e));
      end
    end
    if (rst_n && obs_w_valid) begin
      w_cyc.push_back(cyc);
      if (exp_w.size() == 0) check(0, "unexpected W beat");
      else begin
        logic [31:0] e;
        e = exp_w.pop_front();
        check(obs_w_addr == e && obs_w_data == wdata_of(e), $sformatf("W beat %h expected %h", obs_w_addr, e));
        check(wstrb == 4'hF, "wstrb");
      end
    end
    if (arvalid && arready) n_ar++;
    if (awvalid && awready) n_aw++;
    n_err += int'(err_inc);
  end

  task automatic send(input logic [31:0] a, input int beats, input bit w);
    logic [31:0] p; int n, l;
    @(negedge clk);
    cmd_valid = 1; cmd = '{addr: a, beats_m1: 16'(beats - 1), write: w};
    for (int i = 0; i < beats; i++)
      if (w) exp_w.push_back(a + 32'(i * 4)); else exp_r.push_back(a + 32'(i * 4));
    p = a; n = beats;
    while (n > 0) begin
      l = n;
      if (l > 256) l = 256;
      if (l > (4096 - int'(p[11:0])) / 4) l = (4096 - int'(p[11:0])) / 4;
      exp_bursts++; n -= l; p += 32'(l * 4);
    end
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
  endtask

  task automatic drain();
    int t = 0;
    @(negedge clk); cmd_valid = 0;
    while (!(idle && exp_r.size() == 0 && exp_w.size() == 0) && t < 20000) begin @(negedge clk); t++; end
    check(exp_r.size() == 0 && exp_w.size() == 0, "all beats seen");
    check(idle, "idle at end");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // random commands under back-pressure
    for (int i = 0; i < 30; i++)
      send(32'($urandom_range(32'h7FFF, 0)) << 2, $urandom_range(40, 1), $urandom_range(1, 0));
    // long commands: 256-beat limit and 4 KB boundary
    send(32'h0001_0F00, 700, 0);
    send(32'h0002_0FF0, 300, 1);
    drain();
    check(n_ar + n_aw == exp_bursts, $sformatf("bursts %0d expected %0d", n_ar + n_aw, exp_bursts));
    // error responses: one read burst, one write burst
    n_err = 0;
    send(ERR_A, 4, 0);
    send(ERR_A, 4, 1);
    drain();
    // SLVERR on each of the 4 read beats, plus one write response
    check(n_err == 5, $sformatf("errors counted %0d", n_err));
    // rate
    ready_pct = 100;
    repeat (4) @(negedge clk);
    r_cyc.delete(); w_cyc.delete();
    send(32'h0004_0000, 600, 0);
    drain();
    send(32'h0005_0000, 600, 1);
    drain();
    check(r_cyc.size() == 600 && w_cyc.size() == 600, "rate beat counts");
    for (int i = 1; i < r_cyc.size(); i++) check(r_cyc[i] == r_cyc[i-1] + 1, $sformatf("R beat %0d back to back", i));
    for (int i = 1; i < w_cyc.size(); i++) check(w_cyc[i] == w_cyc[i-1] + 1, $sformatf("W beat %0d back to back", i));
    check(violations == 0, $sformatf("protocol violations %0d", violations));
    check(stall_cycles > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
