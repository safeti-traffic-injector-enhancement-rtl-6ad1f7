// tb_safeti_desc_buf: self-checking test of the descriptor buffer.
//
// Writes random words to every word of every descriptor through the APB-side
// port, keeps a reference copy, then reads each word back through the APB
// read port and each whole descriptor through the fetch port, checking the
// one-cycle read latency and that the fetch output holds while fetch_en is
// low. Rewrites single words and checks the neighbours are untouched.
module tb_safeti_desc_buf;
  import safeti_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned IW = $clog2(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic            wr_en = 1'b0, ard_en = 1'b0, fetch_en = 1'b0;
  logic [IW-1:0]   wr_idx = '0, ard_idx = '0, fetch_idx = '0;
  logic [1:0]      wr_word = '0, ard_word = '0;
  logic [31:0]     wr_data = '0, ard_data;
  logic [DESC_WORDS*32-1:0] fetch_data;

  safeti_desc_buf #(.N_DESC(N)) dut (.*);

  logic [31:0] ref_mem [N][DESC_WORDS];
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int i, input int w, input logic [31:0] d);
    @(negedge clk); wr_en = 1'b1; wr_idx = IW'(i); wr_word = 2'(w); wr_data = d;
    ref_mem[i][w] = d;
    @(negedge clk); wr_en = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++)
      for (int w = 0; w < DESC_WORDS; w++) wr(i, w, $urandom());
    // APB-side reads
    for (int i = 0; i < N; i++)
      for (int w = 0; w < DESC_WORDS; w++) begin
        @(negedge clk); ard_en = 1'b1; ard_idx = IW'(i); ard_word = 2'(w);
        @(negedge clk); ard_en = 1'b0;
        check(ard_data == ref_mem[i][w], $sformatf("apb read %0d.%0d", i, w));
      end
    // fetch-side reads, in a scrambled order
    for (int k = 0; k < N; k++) begin
      int i;
      i = (k * 5 + 3) % N;
      @(negedge clk); fetch_en = 1'b1; fetch_idx = IW'(i);
      @(negedge clk); fetch_en = 1'b0; fetch_idx = IW'(i + 1);
      for (int w = 0; w < DESC_WORDS; w++)
        check(fetch_data[w*32 +: 32] == ref_mem[i][w], $sformatf("fetch %0d.%0d", i, w));
      @(negedge clk);
      check(fetch_data[31:0] == ref_mem[i][0], "fetch output holds");
    end
    // single-word rewrite leaves the other words intact
    wr(7, 2, 32'hCAFE_F00D);
    @(negedge clk); fetch_en = 1'b1; fetch_idx = IW'(7);
    @(negedge clk); fetch_en = 1'b0;
    for (int w = 0; w < DESC_WORDS; w++)
      check(fetch_data[w*32 +: 32] == ref_mem[7][w], $sformatf("rewrite %0d", w));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
