// tb_safeti_ahb_master: self-checking test of the AHB master interface.
//
// Feeds transfer commands into safeti_ahb_master in front of the behavioural
// AHB slave, and compares every completed data phase (address, direction,
// write data) with the beat list expanded from the commands. Covers random
// wait states, a command that crosses a 1 KB boundary (a new NONSEQ must
// start there), an ERROR response, and measures the rate: with zero wait
// states and commands offered back to back, B beats must complete in B
// consecutive cycles.
module tb_safeti_ahb_master;
  import safeti_pkg::*;
  localparam logic [31:0] ERR_A = 32'h0000_7008;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, idle;
  cmd_t cmd = '0;
  logic [1:0] beat_inc, err_inc;
  logic [31:0] haddr, hwdata, hrdata;
  logic [1:0] htrans;
  logic hwrite, hready, hresp;
  logic [2:0] hsize, hburst;
  logic [3:0] hprot;
  int unsigned max_wait = 0;
  logic obs_valid, obs_write, obs_err;
  logic [31:0] obs_addr, obs_wdata;
  int unsigned violations, wait_cycles;

  safeti_ahb_master dut (.*);
  ahb_slave_model #(.ERR_ADDR(ERR_A)) u_slv (.*);

  typedef struct { logic [31:0] a; logic w; } beat_t;
  beat_t exp_q[$];
  int checks = 0, failures = 0, n_err = 0, n_beat_inc = 0, n_boundary_nonseq = 0;
  longint cyc = 0;
  longint beat_cyc[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && obs_valid) begin
      beat_cyc.push_back(cyc);
      if (exp_q.size() == 0) check(0, "unexpected beat");
      else begin
        beat_t e;
        e = exp_q.pop_front();
        check(obs_addr == e.a && obs_write == e.w,
              $sformatf("beat %h/%0d expected %h/%0d", obs_addr, obs_write, e.a, e.w));
        if (e.w) check(obs_wdata == wdata_of(e.a), "write data");
      end
    end
    n_err += int'(err_inc);
    n_beat_inc += int'(beat_inc);
    if (htrans == 2'b10 && hready && haddr[9:0] == 0) n_boundary_nonseq++;
  end

  task automatic send(input logic [31:0] a, input int beats, input bit w);
    // drive between edges; the command is taken at the next rising edge
    // at which cmd_ready is high
    @(negedge clk);
    cmd_valid = 1; cmd = '{addr: a, beats_m1: 16'(beats - 1), write: w};
    for (int i = 0; i < beats; i++) exp_q.push_back('{a: a + 32'(i * 4), w: w});
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
  endtask

  task automatic drain();
    int t = 0;
    @(negedge clk); cmd_valid = 0;
    while (!(idle && exp_q.size() == 0) && t < 5000) begin @(posedge clk); t++; end
    check(exp_q.size() == 0, "all beats seen");
    check(idle, "idle at end");
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total, b0;
    repeat (3) @(negedge clk); rst_n = 1;
    // random commands, random wait states
    max_wait = 3;
    for (int i = 0; i < 40; i++)
      send(32'($urandom_range(32'h3FFF, 0)) << 2, $urandom_range(9, 1), $urandom_range(1, 0));
    // crossing a 1 KB boundary
    send(32'h0000_13F8, 4, 1);
    drain();
    check(n_boundary_nonseq >= 1, "NONSEQ at 1 KB boundary");
    // error response
    n_err = 0;
    send(32'h0000_7000, 4, 0);
    drain();
    check(n_err == 1, $sformatf("one error counted (%0d)", n_err));
    // rate: zero wait states, back-to-back commands
    max_wait = 0;
    @(posedge clk);
    beat_cyc.delete();
    total = 0;
    for (int i = 0; i < 10; i++) begin
      send(32'(32'h2_0000 + i * 32'h100), (i % 3) + 1, i[0]);
      total += (i % 3) + 1;
    end
    drain();
    check(beat_cyc.size() == total, "rate test beat count");
    for (int i = 1; i < beat_cyc.size(); i++)
      check(beat_cyc[i] == beat_cyc[i-1] + 1, $sformatf("beat %0d back to back", i));
    check(violations == 0, $sformatf("protocol violations %0d", violations));
    check(wait_cycles > 0, "wait states were exercised");
    check(n_beat_inc > 0, "beat_inc counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
