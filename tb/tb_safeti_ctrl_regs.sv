// tb_safeti_ctrl_regs: self-checking test of the APB control registers.
//
// Drives APB transfers into safeti_ctrl_regs (with a real descriptor buffer
// behind it) and plays the injector side from the testbench. Checks reset
// values, LOOP read-back, that CTRL.EN produces one start pulse only while
// idle, that ABORT pulses only while busy, the BEATS/DESCS/ERRORS counters
// (including 2-per-cycle increments) and their clearing on start, the sticky
// DONE and ERR bits, descriptor read/write through the window, and PSLVERR
// for an undefined register and for a descriptor index past the buffer.
module tb_safeti_ctrl_regs;
  import safeti_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned IW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              psel = 0, penable = 0, pwrite = 0;
  logic [APB_AW-1:0] paddr = '0;
  logic [31:0]       pwdata = '0, prdata;
  logic              pready, pslverr;
  logic              dbuf_wr_en, dbuf_rd_en;
  logic [IW-1:0]     dbuf_idx;
  logic [1:0]        dbuf_word;
  logic [31:0]       dbuf_wr_data, dbuf_rd_data;
  logic              start, loop, abort;
  logic              busy = 0, done = 0, desc_inc = 0;
  logic [1:0]        beat_inc = 0, err_inc = 0;
  logic [DESC_WORDS*32-1:0] fetch_data;

  safeti_ctrl_regs #(.N_DESC(N)) dut (.*);
  safeti_desc_buf #(.N_DESC(N)) u_buf (
    .clk, .wr_en(dbuf_wr_en), .wr_idx(dbuf_idx), .wr_word(dbuf_word), .wr_data(dbuf_wr_data),
    .ard_en(dbuf_rd_en), .ard_idx(dbuf_idx), .ard_word(dbuf_word), .ard_data(dbuf_rd_data),
    .fetch_en(1'b0), .fetch_idx('0), .fetch_data);

  int checks = 0, failures = 0, n_start = 0, n_abort = 0;
  always @(posedge clk) begin
    if (start) n_start++;
    if (abort) n_abort++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic apb(input bit wr, input logic [11:0] a, input logic [31:0] d,
                     output logic [31:0] rd, output logic err);
    @(negedge clk); psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    #1; rd = prdata; err = pslverr;
    check(pready == 1'b1, "pready");
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    logic [31:0] r; logic e;
    apb(1, a, d, r, e);
    check(!e, $sformatf("no error on write %h", a));
  endtask

  task automatic rd(input logic [11:0] a, input logic [31:0] exp, input string what);
    logic [31:0] r; logic e;
    apb(0, a, 0, r, e);
    check(!e && r == exp, $sformatf("%s: read %h got %h exp %h", what, a, r, exp));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r; logic e;
    repeat (3) @(negedge clk); rst_n = 1;
    rd(REG_CTRL, 0, "ctrl reset");
    rd(REG_STATUS, 0, "status reset");
    rd(REG_BEATS, 0, "beats reset");
    // loop bit
    wr(REG_CTRL, 32'h2);
    check(loop == 1'b1 && n_start == 0, "loop set, no start");
    rd(REG_CTRL, 32'h2, "ctrl loop readback");
    // start while idle
    wr(REG_CTRL, 32'h3);
    check(n_start == 1, "one start pulse");
    busy = 1;
    rd(REG_STATUS, 32'h1, "status busy");
    rd(REG_CTRL, 32'h3, "ctrl en while busy");
    wr(REG_CTRL, 32'h3);
    check(n_start == 1, "no start while busy");
    // counters
    @(negedge clk); desc_inc = 1; beat_inc = 2; err_inc = 1;
    @(negedge clk); beat_inc = 1; err_inc = 0;
    @(negedge clk); desc_inc = 0; beat_inc = 0;
    rd(REG_BEATS, 3, "beats count");
    rd(REG_DESCS, 2, "descs count");
    rd(REG_ERRORS, 1, "errors count");
    rd(REG_STATUS, 32'h5, "status err");
    // abort
    wr(REG_CTRL, 32'h4);
    check(n_abort == 1, "abort pulse while busy");
    @(negedge clk); done = 1; busy = 0;
    @(negedge clk); done = 0;
    rd(REG_STATUS, 32'h6, "status done sticky");
    wr(REG_CTRL, 32'h4);
    check(n_abort == 1, "no abort while idle");
    // restart clears counters and sticky bits
    wr(REG_CTRL, 32'h1);
    check(n_start == 2, "second start");
    rd(REG_BEATS, 0, "beats cleared");
    rd(REG_ERRORS, 0, "errors cleared");
    rd(REG_STATUS, 0, "status cleared");
    rd(REG_CTRL, 0, "loop cleared by write");
    // descriptor window
    for (int i = 0; i < N; i++)
      for (int w = 0; w < DESC_WORDS; w++) wr(12'(DESC_BASE + i*16 + w*4), 32'(i*256 + w + 32'hA0000));
    for (int i = N - 1; i >= 0; i--)
      for (int w = 0; w < DESC_WORDS; w++) rd(12'(DESC_BASE + i*16 + w*4), 32'(i*256 + w + 32'hA0000), "desc");
    // errors
    apb(0, 12'h020, 0, r, e); check(e, "pslverr undefined reg");
    apb(1, 12'(DESC_BASE + N*16), 32'h1, r, e); check(e, "pslverr desc out of range");
    rd(12'(DESC_BASE), 32'hA0000, "out-of-range write ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
