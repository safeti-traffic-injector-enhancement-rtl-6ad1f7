// tb_safeti_ahb: end-to-end test of one SafeTI with its AHB data port.
//
// Programs descriptors over APB, starts the injector, polls STATUS and checks
// every AHB data phase against the beat list expanded from the descriptors,
// together with the BEATS, DESCS and ERRORS counters. Scenarios: a mixed
// read/write program with repetitions under random wait states, a program
// that includes an ERROR response, a back-to-back program with zero wait
// states whose beats must complete on consecutive cycles (the pipelined
// injector adds no gap between descriptors), and LOOP followed by ABORT.
module tb_safeti_ahb;
  import safeti_pkg::*;
  localparam logic [31:0] ERR_A = 32'h0000_6004;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic psel_drv = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr;
  logic [31:0] haddr, hwdata, hrdata;
  logic [1:0] htrans;
  logic hwrite, hready, hresp;
  logic [2:0] hsize, hburst;
  logic [3:0] hprot;
  int unsigned max_wait = 2;
  logic obs_valid, obs_write, obs_err;
  logic [31:0] obs_addr, obs_wdata;
  int unsigned violations, wait_cycles;

  safeti_ahb dut (.clk, .rst_n, .psel(psel_drv), .penable, .paddr, .pwrite, .pwdata,
                  .prdata, .pready, .pslverr, .haddr, .htrans, .hwrite, .hsize, .hburst,
                  .hprot, .hwdata, .hready, .hresp, .hrdata);
  ahb_slave_model #(.ERR_ADDR(ERR_A)) u_slv (.*);

  int checks = 0, failures = 0;
  `include "safeti_tb_apb.svh"

  typedef struct { logic [31:0] a; logic w; } beat_t;
  beat_t exp_q[$];
  longint cyc = 0;
  longint beat_cyc[$];
  int n_beats = 0;
  bit free_run = 0;   // loop mode: do not compare against a list

  always @(posedge clk) begin
    cyc++;
    if (rst_n && obs_valid) begin
      n_beats++;
      beat_cyc.push_back(cyc);
      if (!free_run) begin
        if (exp_q.size() == 0) check(0, "unexpected beat");
        else begin
          beat_t e;
          e = exp_q.pop_front();
          check(obs_addr == e.a && obs_write == e.w,
                $sformatf("beat %h/%0d expected %h/%0d", obs_addr, obs_write, e.a, e.w));
          if (e.w) check(obs_wdata == wdata_of(e.a), "write data");
        end
      end
    end
  end

  task automatic desc(input int i, input logic [31:0] a, input int beats, input int reps,
                      input bit w, input bit last);
    put_desc(i, a, beats, reps, w, last);
    for (int r = 0; r < reps; r++)
      for (int b = 0; b < beats; b++) exp_q.push_back('{a: a + 32'(b * 4), w: w});
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

    // 1: mixed program with repetitions, random wait states
    desc(0, 32'h0000_1000, 4, 3, 0, 0);
    desc(1, 32'h0000_2000, 8, 1, 1, 0);
    desc(2, 32'h0000_23F0, 12, 2, 0, 0);   // crosses a 1 KB boundary
    desc(3, 32'h0000_3000, 1, 5, 1, 1);
    total = exp_q.size();
    apb_wr(12'h000, 32'h1);
    wait_status_done(2000);
    check(exp_q.size() == 0, "program 1 complete");
    apb_rd(12'h008, r); check(r == 32'(total), $sformatf("BEATS register %0d", r));
    apb_rd(12'h00C, r); check(r == 4, $sformatf("DESCS register %0d", r));
    apb_rd(12'h010, r); check(r == 0, "ERRORS register zero");

    // 2: error response
    desc(0, 32'h0000_6000, 4, 1, 1, 1);
    apb_wr(12'h000, 32'h1);
    wait_status_done(2000);
    apb_rd(12'h010, r); check(r == 1, $sformatf("ERRORS register %0d", r));
    apb_rd(12'h004, r); check(r[2], "STATUS.ERR");

    // 3: zero wait states, one beat per cycle across descriptor boundaries
    max_wait = 0;
    for (int i = 0; i < 12; i++) desc(i, 32'(32'h0001_0000 + i * 32'h40), (i % 4) + 1, (i % 3) + 1, i[0], i == 11);
    total = exp_q.size();
    beat_cyc.delete();
    apb_wr(12'h000, 32'h1);
    wait_status_done(2000);
    check(exp_q.size() == 0, "program 3 complete");
    check(beat_cyc.size() == total, "program 3 beat count");
    for (int i = 1; i < beat_cyc.size(); i++)
      check(beat_cyc[i] == beat_cyc[i-1] + 1, $sformatf("program 3 beat %0d back to back", i));

    // 4: loop, then abort
    max_wait = 1;
    free_run = 1;
    put_desc(0, 32'h0002_0000, 2, 1, 0, 0);
    put_desc(1, 32'h0002_1000, 3, 1, 1, 1);
    n_beats = 0;
    apb_wr(12'h000, 32'h3);
    while (n_beats < 60) @(negedge clk);
    apb_rd(12'h00C, r); check(r >= 10, $sformatf("loop ran through %0d descriptors", r));
    apb_wr(12'h000, 32'h4);
    wait_status_done(200);
    check(violations == 0, $sformatf("AHB protocol violations %0d", violations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
