// tb_safeti_injector: self-checking test of the pipelined traffic injector.
//
// The testbench models the descriptor buffer (one-cycle synchronous read) and
// the bus master (random cmd_ready, and a master that stays busy for a few
// cycles after each command). It compares the commands issued against the
// list expanded directly from the descriptors (REPS+1 copies of each), and
// measures the pipeline: with the master always ready, descriptors of one
// repetition must leave one per cycle with no bubble, and the first command
// must appear four cycles after start. It also covers LOOP (wrap to entry 0
// with no bubble), ABORT, a program that ends at the final buffer entry, and
// the done/busy/desc_done outputs.
module tb_safeti_injector;
  import safeti_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned IW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, loop = 0, abort = 0, cmd_ready = 0;
  logic busy, done, desc_done, fetch_en, cmd_valid, master_idle;
  logic [IW-1:0] fetch_idx;
  logic [DESC_WORDS*32-1:0] fetch_data;
  cmd_t cmd;

  safeti_injector #(.N_DESC(N)) dut (.*);

  // descriptor memory model
  logic [DESC_WORDS*32-1:0] mem [N];
  always_ff @(posedge clk) if (fetch_en) fetch_data <= mem[fetch_idx];

  // master model: busy for `hold` cycles after each command
  int unsigned pending = 0;
  assign master_idle = (pending == 0);
  int unsigned hold_max = 0;

  typedef struct { cmd_t c; longint cyc; } obs_t;
  obs_t   got[$];
  cmd_t   exp_q[$];
  longint cyc = 0, start_cyc = 0;
  int     n_done = 0, n_desc = 0, checks = 0, failures = 0;

  always @(posedge clk) begin
    cyc++;
    if (cmd_valid && cmd_ready) got.push_back('{c: cmd, cyc: cyc});
    if (done) n_done++;
    if (desc_done) n_desc++;
    if (cmd_valid && cmd_ready) pending = pending + ((hold_max > 0) ? $urandom_range(hold_max, 1) : 0);
    else if (pending > 0) pending--;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [127:0] mk(input logic [31:0] addr, input int beats, input int reps,
                                      input bit wr, input bit last);
    return {32'h0, 16'h0, 16'(beats - 1), addr, 16'(reps - 1), 14'h0, last, wr};
  endfunction

  task automatic expect_desc(input logic [31:0] addr, input int beats, input int reps, input bit wr);
    for (int r = 0; r < reps; r++) exp_q.push_back('{addr: addr, beats_m1: 16'(beats - 1), write: wr});
  endtask

  task automatic go();
    got.delete(); n_done = 0; n_desc = 0;
    @(negedge clk); start = 1; start_cyc = cyc + 1;
    @(negedge clk); start = 0;
  endtask

  task automatic wait_done();
    int t = 0;
    while (n_done == 0 && t < 3000) begin @(negedge clk); t++; end
    check(n_done == 1, "done pulse seen once");
    check(!busy, "busy low after done");
  endtask

  task automatic compare(input string what);
    check(got.size() == exp_q.size(), $sformatf("%s: %0d commands, expected %0d", what, got.size(), exp_q.size()));
    for (int i = 0; i < got.size() && i < exp_q.size(); i++)
      check(got[i].c == exp_q[i], $sformatf("%s: command %0d", what, i));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random ready in phases where rand_ready is set
  bit rand_ready = 0;
  always @(negedge clk) if (rand_ready) cmd_ready <= ($urandom_range(99, 0) < 60);

  initial begin
    int nd;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1: mixed program, random back-pressure, slow master
    exp_q.delete();
    mem[0] = mk(32'h1000, 4, 2, 0, 0); expect_desc(32'h1000, 4, 2, 0);
    mem[1] = mk(32'h2000, 1, 1, 1, 0); expect_desc(32'h2000, 1, 1, 1);
    mem[2] = mk(32'h3000, 16, 3, 1, 0); expect_desc(32'h3000, 16, 3, 1);
    mem[3] = mk(32'h4000, 2, 1, 0, 0); expect_desc(32'h4000, 2, 1, 0);
    mem[4] = mk(32'h5000, 256, 5, 0, 0); expect_desc(32'h5000, 256, 5, 0);
    mem[5] = mk(32'h6000, 8, 1, 1, 1); expect_desc(32'h6000, 8, 1, 1);
    mem[6] = mk(32'hDEAD0, 8, 1, 1, 1);  // after LAST: must not run
    hold_max = 3; rand_ready = 1;
    go(); wait_done();
    compare("mixed");
    check(n_desc == 6, "desc_done count");

    // 2: throughput and latency, master always ready
    rand_ready = 0; hold_max = 0;
    @(negedge clk); cmd_ready = 1;
    exp_q.delete();
    nd = 8;
    for (int i = 0; i < nd; i++) begin
      mem[i] = mk(32'(32'h8000 + i * 64), i + 1, (i == 3) ? 4 : 1, i[0], i == nd - 1);
      expect_desc(32'(32'h8000 + i * 64), i + 1, (i == 3) ? 4 : 1, i[0]);
    end
    go(); wait_done();
    compare("back-to-back");
    check(got.size() > 0 && got[0].cyc - start_cyc == 4, $sformatf("first command %0d cycles after start", got.size() > 0 ? got[0].cyc - start_cyc : -1));
    for (int i = 1; i < got.size(); i++)
      check(got[i].cyc == got[i-1].cyc + 1, $sformatf("no bubble before command %0d", i));

    // 3: loop mode, then abort
    exp_q.delete();
    mem[0] = mk(32'hA000, 1, 1, 0, 0);
    mem[1] = mk(32'hB000, 2, 1, 1, 0);
    mem[2] = mk(32'hC000, 3, 2, 0, 1);
    loop = 1;
    go();
    while (got.size() < 14) @(negedge clk);
    abort = 1; @(negedge clk); abort = 0; loop = 0;
    wait_done();
    for (int k = 0; k < got.size(); k++) begin
      int j;
      cmd_t e;
      j = k % 4;
      e = (j == 0) ? '{addr: 32'hA000, beats_m1: 16'd0, write: 1'b0} :
          (j == 1) ? '{addr: 32'hB000, beats_m1: 16'd1, write: 1'b1} :
                     '{addr: 32'hC000, beats_m1: 16'd2, write: 1'b0};
      check(got[k].c == e, $sformatf("loop command %0d: %h exp %h", k, got[k].c, e));
      if (k > 0) check(got[k].cyc == got[k-1].cyc + 1, $sformatf("loop no bubble %0d", k));
    end
    check(got.size() >= 14 && got.size() <= 16, $sformatf("abort stops quickly (%0d commands)", got.size()));

    // 4: no LAST bit anywhere: program ends at the final buffer entry
    exp_q.delete();
    for (int i = 0; i < N; i++) begin
      mem[i] = mk(32'(32'h10000 + i * 4096), 1, 1, 1, 0);
      expect_desc(32'(32'h10000 + i * 4096), 1, 1, 1);
    end
    go(); wait_done();
    compare("full buffer");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
