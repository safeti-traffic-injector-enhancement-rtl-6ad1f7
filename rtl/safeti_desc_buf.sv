// safeti_desc_buf: the traffic descriptor buffer of one SafeTI.
//
// Holds N_DESC descriptors of DESC_WORDS 32-bit words each. The buffer is
// filled one word at a time from the APB configuration port (so programming it
// never touches the data bus the injector tests) and is read one whole
// descriptor at a time by the injector's fetch stage.
//
// Ports:
//   wr_*     APB-side word write, takes effect at the clock edge.
//   ard_*    APB-side word read; synchronous: ard_data is valid the cycle
//            after ard_en (the APB setup phase issues it, the access phase
//            returns it).
//   fetch_*  injector-side descriptor read; synchronous, fetch_data is valid
//            the cycle after fetch_en and holds until the next fetch_en. This
//            output register is the first pipeline register of the injector.
//
// The separate APB write port follows the paper; the depth, the word layout
// and the synchronous reads are this design's choices. The array is not
// reset: only entries written over APB are meaningful.
module safeti_desc_buf
  import safeti_pkg::*;
#(
  parameter int unsigned N_DESC = 16,
  localparam int unsigned IDX_W = (N_DESC > 1) ? $clog2(N_DESC) : 1
) (
  input  logic                       clk,

  input  logic                       wr_en,
  input  logic [IDX_W-1:0]           wr_idx,
  input  logic [1:0]                 wr_word,
  input  logic [31:0]                wr_data,

  input  logic                       ard_en,
  input  logic [IDX_W-1:0]           ard_idx,
  input  logic [1:0]                 ard_word,
  output logic [31:0]                ard_data,

  input  logic                       fetch_en,
  input  logic [IDX_W-1:0]           fetch_idx,
  output logic [DESC_WORDS*32-1:0]   fetch_data
);

  logic [DESC_WORDS*32-1:0] mem [N_DESC];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx][wr_word*32 +: 32] <= wr_data;
    if (ard_en) ard_data <= mem[ard_idx][ard_word*32 +: 32];
    if (fetch_en) fetch_data <= mem[fetch_idx];
  end

endmodule
