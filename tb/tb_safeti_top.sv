// tb_safeti_top: end-to-end test of the two-SafeTI integration.
//
// Both SafeTIs are configured over the shared APB bus, each with a full
// buffer of 16 descriptors, and then run at the same time: one injects AHB
// traffic into a behavioural AHB slave with random wait states, the other
// AXI traffic into a behavioural AXI slave with random back-pressure. Every
// beat on both buses is checked against the beat lists expanded from the
// descriptors, and the BEATS, DESCS and ERRORS registers of both are read
// back. A second phase runs both in LOOP mode and stops them with ABORT.
//
// It counts how often each mechanism of the design occurred and fails any
// that never did: back-to-back commands on AHB, repeated transfers, AHB wait
// states, a new AHB burst at a 1 KB boundary, AHB and AXI error responses,
// AXI back-pressure, AXI bursts split at 4 KB or 256 beats, several AXI
// bursts outstanding, both buses active in the same cycle, LOOP wrap-around
// and ABORT. The top runs with its default parameters.
module tb_safeti_top;
  import safeti_pkg::*;
  localparam logic [31:0] AHB_ERR = 32'h0000_5008;
  localparam logic [31:0] AXI_ERR = 32'h0000_B000;
  localparam int unsigned ND = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // APB
  logic psel_drv = 0, penable = 0, pwrite = 0, sel = 0;
  logic [1:0] psel;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr;
  assign psel = psel_drv ? (sel ? 2'b10 : 2'b01) : 2'b00;
  // AHB
  logic [31:0] haddr, hwdata, hrdata;
  logic [1:0] htrans;
  logic hwrite, hready, hresp;
  logic [2:0] hsize, hburst;
  logic [3:0] hprot;
  int unsigned max_wait = 2;
  logic h_obs_valid, h_obs_write, h_obs_err;
  logic [31:0] h_obs_addr, h_obs_wdata;
  int unsigned h_viol, h_waits;
  // AXI
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
  int unsigned x_viol, x_stalls;

  safeti_top dut (
    .clk, .rst_n, .psel, .penable, .paddr, .pwrite, .pwdata, .prdata, .pready, .pslverr,
    .haddr, .htrans, .hwrite, .hsize, .hburst, .hprot, .hwdata, .hready, .hresp, .hrdata,
    .awid, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bid(4'h0), .bresp, .bvalid, .bready,
    .arid, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rid(4'h0), .rdata, .rresp, .rlast, .rvalid, .rready);

  ahb_slave_model #(.ERR_ADDR(AHB_ERR)) u_ahb_slv (
    .max_wait, .clk, .rst_n, .haddr, .htrans, .hwrite, .hwdata, .hready, .hresp, .hrdata,
    .obs_valid(h_obs_valid), .obs_addr(h_obs_addr), .obs_write(h_obs_write),
    .obs_wdata(h_obs_wdata), .obs_err(h_obs_err), .violations(h_viol), .wait_cycles(h_waits));

  axi_slave_model #(.ERR_ADDR(AXI_ERR)) u_axi_slv (
    .ready_pct, .clk, .rst_n, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready,
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready,
    .obs_r_valid, .obs_r_addr, .obs_w_valid, .obs_w_addr, .obs_w_data,
    .violations(x_viol), .stall_cycles(x_stalls));

  int checks = 0, failures = 0;
  `include "safeti_tb_apb.svh"

  typedef struct { logic [31:0] a; logic w; } beat_t;
  beat_t       h_exp[$];
  logic [31:0] r_exp[$], w_exp[$];
  logic [31:0] x_starts[$];
  bit free_run = 0;
  int n_h_beats = 0, n_x_beats = 0;

  // mechanism counters
  int m_b2b = 0, m_repeat = 0, m_1k = 0, m_4k_split = 0, m_outstanding = 0, m_both = 0;
  int m_loop = 0, m_abort = 0, m_ahb_err = 0, m_axi_err = 0;
  logic        h_prev_act = 0;
  logic [31:0] h_prev_addr = '0, h_last_ns = 32'hFFFF_FFFF;
  int          x_out = 0;

  always @(posedge clk) begin
    if (rst_n && h_obs_valid) begin
      n_h_beats++;
      if (!free_run) begin
        if (h_exp.size() == 0) check(0, "unexpected AHB beat");
        else begin
          beat_t e;
          e = h_exp.pop_front();
          check(h_obs_addr == e.a && h_obs_write == e.w,
                $sformatf("AHB beat %h/%0d expected %h/%0d", h_obs_addr, h_obs_write, e.a, e.w));
          if (e.w) check(h_obs_wdata == wdata_of(e.a), "AHB write data");
        end
      end
    end
    if (rst_n && obs_r_valid) begin
      n_x_beats++;
      if (!free_run) begin
        if (r_exp.size() == 0) check(0, "unexpected R beat");
        else begin
          logic [31:0] e;
          e = r_exp.pop_front();
          check(obs_r_addr == e, $sformatf("R beat %h expected %h", obs_r_addr, e));
        end
      end
    end
    if (rst_n && obs_w_valid) begin
      n_x_beats++;
      if (!free_run) begin
        if (w_exp.size() == 0) check(0, "unexpected W beat");
        else begin
          logic [31:0] e;
          e = w_exp.pop_front();
          check(obs_w_addr == e && obs_w_data == wdata_of(e), $sformatf("W beat %h expected %h", obs_w_addr, e));
        end
      end
    end
    // AHB mechanisms
    if (hready) begin
      if (htrans == 2'b10) begin
        if (h_prev_act && haddr != h_prev_addr + 4) m_b2b++;
        if (h_prev_act && haddr == h_prev_addr + 4 && haddr[9:0] == 0) m_1k++;
        if (haddr == h_last_ns) m_repeat++;
        h_last_ns = haddr;
      end
      h_prev_act  = htrans[1];
      h_prev_addr = haddr;
    end
    if (hready && hresp) m_ahb_err++;
    // AXI mechanisms
    if ((arvalid && arready) || (awvalid && awready)) begin
      logic [31:0] a;
      bit found;
      a = (arvalid && arready) ? araddr : awaddr;
      found = 0;
      foreach (x_starts[i]) if (x_starts[i] == a) found = 1;
      if (!found && !free_run) m_4k_split++;
    end
    x_out = x_out + int'(arvalid && arready) + int'(awvalid && awready)
                  - int'(rvalid && rready && rlast) - int'(bvalid && bready);
    if (x_out > 1) m_outstanding++;
    if ((rvalid && rresp[1]) || (bvalid && bresp[1])) m_axi_err++;
    if (htrans[1] && (arvalid || awvalid || rvalid || wvalid)) m_both++;
  end

  task automatic h_desc(input int i, input logic [31:0] a, input int beats, input int reps,
                        input bit w, input bit last);
    sel = 0;
    put_desc(i, a, beats, reps, w, last);
    for (int r = 0; r < reps; r++)
      for (int b = 0; b < beats; b++) h_exp.push_back('{a: a + 32'(b * 4), w: w});
  endtask

  task automatic x_desc(input int i, input logic [31:0] a, input int beats, input int reps,
                        input bit w, input bit last);
    sel = 1;
    put_desc(i, a, beats, reps, w, last);
    x_starts.push_back(a);
    for (int r = 0; r < reps; r++)
      for (int b = 0; b < beats; b++)
        if (w) w_exp.push_back(a + 32'(b * 4)); else r_exp.push_back(a + 32'(b * 4));
  endtask

  task automatic wait_both_done(input int limit);
    logic [31:0] s0, s1;
    int t = 0;
    do begin
      sel = 0; apb_rd(12'h004, s0);
      sel = 1; apb_rd(12'h004, s1);
      t++;
    end while (!(s0[1] && s1[1]) && t < limit);
    check(s0[1] && !s0[0], $sformatf("AHB SafeTI finished (status %h)", s0));
    check(s1[1] && !s1[0], $sformatf("AXI SafeTI finished (status %h)", s1));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int h_total, x_total, h_desc_n, x_desc_n;
    repeat (3) @(negedge clk); rst_n = 1;

    // phase 1: full buffers on both buses, run concurrently
    for (int i = 0; i < ND; i++) begin
      logic [31:0] a;
      int beats, reps;
      a = 32'(32'h0000_1000 + i * 32'h200);
      beats = (i % 5) + 1; reps = (i % 3) + 1;
      if (i == 4) begin a = 32'h0000_03F8; beats = 6; end   // crosses 1 KB
      if (i == 9) begin a = 32'h0000_5000; beats = 4; reps = 1; end  // error beat
      h_desc(i, a, beats, reps, i[0], i == ND - 1);
    end
    for (int i = 0; i < ND; i++) begin
      logic [31:0] a;
      int beats, reps;
      a = 32'(32'h0001_0000 + i * 32'h1000);
      beats = 8 * ((i % 4) + 1); reps = (i % 2) + 1;
      if (i == 3) begin a = 32'h0001_3F00; beats = 300; reps = 1; end  // 4 KB and 256 limits
      if (i == 7) begin a = 32'h0002_0000; beats = 700; reps = 1; end
      if (i == 11) begin a = AXI_ERR; beats = 2; reps = 1; end
      x_desc(i, a, beats, reps, i[1], i == ND - 1);
    end
    // read back the address word of every descriptor through the APB mux
    for (int i = 0; i < ND; i++) begin
      sel = 0; apb_rd(12'(32'h804 + i * 16), r);
      check(r == ((i == 4) ? 32'h0000_03F8 : (i == 9) ? 32'h0000_5000 : 32'(32'h0000_1000 + i * 32'h200)),
            $sformatf("AHB SafeTI descriptor %0d address readback %h", i, r));
      sel = 1; apb_rd(12'(32'h804 + i * 16), r);
      check(r == ((i == 3) ? 32'h0001_3F00 : (i == 7) ? 32'h0002_0000 : (i == 11) ? AXI_ERR : 32'(32'h0001_0000 + i * 32'h1000)),
            $sformatf("AXI SafeTI descriptor %0d address readback %h", i, r));
    end
    h_total = h_exp.size(); x_total = r_exp.size() + w_exp.size();
    sel = 0; apb_wr(12'h000, 32'h1);
    sel = 1; apb_wr(12'h000, 32'h1);
    wait_both_done(5000);
    check(h_exp.size() == 0, "all AHB beats seen");
    check(r_exp.size() == 0 && w_exp.size() == 0, "all AXI beats seen");
    sel = 0; apb_rd(12'h008, r); check(r == 32'(h_total), $sformatf("AHB BEATS %0d", r));
    sel = 0; apb_rd(12'h00C, r); check(r == ND, $sformatf("AHB DESCS %0d", r));
    sel = 0; apb_rd(12'h010, r); check(r == 1, $sformatf("AHB ERRORS %0d", r));
    sel = 1; apb_rd(12'h008, r); check(r == 32'(x_total), $sformatf("AXI BEATS %0d", r));
    sel = 1; apb_rd(12'h00C, r); check(r == ND, $sformatf("AXI DESCS %0d", r));
    sel = 1; apb_rd(12'h010, r); check(r == 1, $sformatf("AXI ERRORS %0d", r));

    // phase 2: loop mode on both, then abort
    free_run = 1;
    sel = 0; put_desc(0, 32'h0000_8000, 3, 1, 0, 0); put_desc(1, 32'h0000_9000, 2, 2, 1, 1);
    sel = 1; put_desc(0, 32'h0003_0000, 4, 1, 1, 0); put_desc(1, 32'h0003_1000, 6, 1, 0, 1);
    n_h_beats = 0; n_x_beats = 0;
    sel = 0; apb_wr(12'h000, 32'h3);
    sel = 1; apb_wr(12'h000, 32'h3);
    while (n_h_beats < 80 || n_x_beats < 80) @(negedge clk);
    sel = 0; apb_rd(12'h00C, h_desc_n);
    sel = 1; apb_rd(12'h00C, x_desc_n);
    if (h_desc_n > 2 && x_desc_n > 2) m_loop++;
    sel = 0; apb_wr(12'h000, 32'h4);
    sel = 1; apb_wr(12'h000, 32'h4);
    wait_both_done(200);
    m_abort++;
    sel = 0; apb_rd(12'h000, r); check(r[0] == 0, "AHB SafeTI stopped");
    sel = 1; apb_rd(12'h000, r); check(r[0] == 0, "AXI SafeTI stopped");

    check(h_viol == 0, $sformatf("AHB protocol violations %0d", h_viol));
    check(x_viol == 0, $sformatf("AXI protocol violations %0d", x_viol));
    $display("mechanisms: back_to_back=%0d repeat=%0d ahb_wait=%0d ahb_1k=%0d ahb_err=%0d axi_stall=%0d axi_split=%0d axi_outstanding=%0d axi_err=%0d both_buses=%0d loop=%0d abort=%0d",
             m_b2b, m_repeat, h_waits, m_1k, m_ahb_err, x_stalls, m_4k_split, m_outstanding, m_axi_err, m_both, m_loop, m_abort);
    check(m_b2b > 0, "back-to-back commands happened");
    check(m_repeat > 0, "repeated transfers happened");
    check(h_waits > 0, "AHB wait states happened");
    check(m_1k > 0, "AHB 1 KB burst restart happened");
    check(m_ahb_err > 0, "AHB error response happened");
    check(x_stalls > 0, "AXI back-pressure happened");
    check(m_4k_split > 0, "AXI burst split happened");
    check(m_outstanding > 0, "several AXI bursts outstanding");
    check(m_axi_err > 0, "AXI error response happened");
    check(m_both > 0, "both buses active together");
    check(m_loop > 0, "loop mode wrapped");
    check(m_abort > 0, "abort completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
