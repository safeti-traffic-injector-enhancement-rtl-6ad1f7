// tb_safeti_axi: end-to-end test of one SafeTI with its AXI4 data port.
//
// Programs descriptors over APB, starts the injector, polls STATUS and checks
// every R and W beat against the beat lists expanded from the descriptors,
// with the BEATS, DESCS and ERRORS counters. Scenarios: a mixed program with
// repetitions and long transfers (split at 256 beats and at 4 KB) under
// random back-pressure, SLVERR responses, a read-only and a write-only
// program with an always-ready slave whose beats must stream on consecutive
// cycles across descriptor boundaries, and LOOP followed by ABORT.
module tb_safeti_axi;
  import safeti_pkg::*;
  localparam logic [31:0] ERR_A = 32'h0000_9000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic psel_drv = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr;
  logic [3:0] awid, arid;
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

  safeti_axi dut (.clk, .rst_n, .psel(psel_drv), .penable, .paddr, .pwrite, .pwdata,
                  .prdata, .pready, .pslverr,
                  .awid, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
                  .wdata, .wstrb, .wlast, .wvalid, .wready, .bid(4'h0), .bresp, .bvalid, .bready,
                  .arid, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
                  .rid(4'h0), .rdata, .rresp, .rlast, .rvalid, .rready);
  axi_slave_model #(.ERR_ADDR(ERR_A)) u_slv (.*);

  int checks = 0, failures = 0;
  `include "safeti_tb_apb.svh"

  logic [31:0] exp_r[$], exp_w[$];
  longint r_cyc[$], w_cyc[$];
  longint cyc = 0;
  int n_beats = 0;
  bit free_run = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && obs_r_valid) begin
      n_beats++; r_cyc.push_back(cyc);
      if (!free_run) begin
        if (exp_r.size() == 0) check(0, "unexpected R beat");
        else begin
          logic [31:0] e;
          e = exp_r.pop_front();
          check(obs_r_addr == e, $sformatf("R beat %h expected %h", obs_r_addr, e));
        end
      end
    end
    if (rst_n && obs_w_valid) begin
      n_beats++; w_cyc.push_back(cyc);
      if (!free_run) begin
        if (exp_w.size() == 0) check(0, "unexpected W beat");
        else begin
          logic [31:0] e;
          e = exp_w.pop_front();
          check(obs_w_addr == e && obs_w_data == wdata_of(e), $sformatf("W beat %h expected %h", obs_w_addr, e));
        end
      end
    end
  end

  task automatic desc(input int i, input logic [31:0] a, input int beats, input int reps,
                      input bit w, input bit last);
    put_desc(i, a, beats, reps, w, last);
    for (int r = 0; r < reps; r++)
      for (int b = 0; b < beats; b++)
        if (w) exp_w.push_back(a + 32'(b * 4)); else exp_r.push_back(a + 32'(b * 4));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int total;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1: mixed program, back-pressure, long transfers
    desc(0, 32'h0000_1000, 4, 3, 0, 0);
    desc(1, 32'h0000_2F00, 300, 1, 1, 0);  // 4 KB boundary and 256-beat limit
    desc(2, 32'h0000_4000, 600, 1, 0, 0);
    desc(3, 32'h0000_8000, 1, 4, 1, 1);
    total = exp_r.size() + exp_w.size();
    apb_wr(12'h000, 32'h1);
    wait_status_done(4000);
    check(exp_r.size() == 0 && exp_w.size() == 0, "program 1 complete");
    apb_rd(12'h008, r); check(r == 32'(total), $sformatf("BEATS register %0d", r));
    apb_rd(12'h00C, r); check(r == 4, $sformatf("DESCS register %0d", r));

    // 2: SLVERR on a read burst (2 beats) and a write burst (1 response)
    desc(0, ERR_A, 2, 1, 0, 0);
    desc(1, ERR_A, 2, 1, 1, 1);
    apb_wr(12'h000, 32'h1);
    wait_status_done(2000);
    apb_rd(12'h010, r); check(r == 3, $sformatf("ERRORS register %0d", r));

    // 3: streaming rate, read-only then write-only
    ready_pct = 100;
    for (int i = 0; i < 10; i++) desc(i, 32'(32'h0001_0000 + i * 32'h100), (i % 4) + 2, (i % 2) + 1, 0, i == 9);
    r_cyc.delete();
    total = exp_r.size();
    apb_wr(12'h000, 32'h1);
    wait_status_done(2000);
    check(r_cyc.size() == total, "read stream beat count");
    for (int i = 1; i < r_cyc.size(); i++) check(r_cyc[i] == r_cyc[i-1] + 1, $sformatf("R beat %0d back to back", i));
    for (int i = 0; i < 10; i++) desc(i, 32'(32'h0002_0000 + i * 32'h100), (i % 4) + 2, (i % 2) + 1, 1, i == 9);
    w_cyc.delete();
    total = exp_w.size();
    apb_wr(12'h000, 32'h1);
    wait_status_done(2000);
    check(w_cyc.size() == total, "write stream beat count");
    for (int i = 1; i < w_cyc.size(); i++) check(w_cyc[i] == w_cyc[i-1] + 1, $sformatf("W beat %0d back to back", i));

    // 4: loop, then abort
    ready_pct = 70;
    free_run = 1;
    put_desc(0, 32'h0003_0000, 5, 1, 0, 0);
    put_desc(1, 32'h0003_1000, 3, 1, 1, 1);
    n_beats = 0;
    apb_wr(12'h000, 32'h3);
    while (n_beats < 100) @(negedge clk);
    apb_rd(12'h00C, r); check(r >= 10, $sformatf("loop ran through %0d descriptors", r));
    apb_wr(12'h000, 32'h4);
    wait_status_done(200);
    check(violations == 0, $sformatf("AXI protocol violations %0d", violations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
