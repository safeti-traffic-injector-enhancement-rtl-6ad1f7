// safeti_tb_apb.svh: APB master tasks and descriptor helpers shared by the
// SafeTI testbenches. Included inside a testbench module that declares clk,
// psel_drv, penable, pwrite, paddr, pwdata, prdata, pslverr, checks and
// failures. Transfers are driven between clock edges: setup phase, then one
// access phase (the SafeTI APB slave never inserts wait states).

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin failures++; $display("FAIL: %s", what); end
endtask

task automatic apb(input bit wr, input logic [11:0] a, input logic [31:0] d,
                   output logic [31:0] rd, output logic err);
  @(negedge clk); psel_drv = 1; penable = 0; pwrite = wr; paddr = a; pwdata = d;
  @(negedge clk); penable = 1;
  #1; rd = prdata; err = pslverr;
  @(negedge clk); psel_drv = 0; penable = 0;
endtask

task automatic apb_wr(input logic [11:0] a, input logic [31:0] d);
  logic [31:0] r; logic e;
  apb(1, a, d, r, e);
  check(!e, $sformatf("APB write %h accepted", a));
endtask

task automatic apb_rd(input logic [11:0] a, output logic [31:0] r);
  logic e;
  apb(0, a, 0, r, e);
endtask

// Write descriptor i: BEATS data beats at ADDR, repeated REPS times.
task automatic put_desc(input int i, input logic [31:0] addr, input int beats, input int reps,
                        input bit wr, input bit last);
  apb_wr(12'(32'h800 + i * 16 + 0), {16'(reps - 1), 14'h0, last, wr});
  apb_wr(12'(32'h800 + i * 16 + 4), addr);
  apb_wr(12'(32'h800 + i * 16 + 8), 32'(beats - 1));
endtask

// Poll STATUS until DONE (bit 1) is set.
task automatic wait_status_done(input int limit);
  logic [31:0] s;
  int t = 0;
  do begin apb_rd(12'h004, s); t++; end while (!s[1] && t < limit);
  check(s[1] && !s[0], $sformatf("SafeTI finished (status %h)", s));
endtask
