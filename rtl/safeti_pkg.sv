// safeti_pkg: types and constants shared by the SafeTI traffic injector.
//
// A traffic descriptor tells the injector what traffic to generate: a target
// address, whether the accesses are reads or writes, how much data to move and
// how many times to repeat the transfer. Those four fields are what the
// injector's description requires; their widths, their packing into 32-bit
// words and the register map below are choices of this implementation.
//
// Descriptor layout, DESC_WORDS = 4 words of 32 bits per descriptor:
//   word 0  control : [0] WRITE (1 = write, 0 = read)
//                     [1] LAST  (last descriptor of the program)
//                     [31:16] REPS (the transfer is issued REPS+1 times)
//   word 1  address : byte address of the first beat (word aligned)
//   word 2  length  : [15:0] BEATS (the transfer is BEATS+1 data beats)
//   word 3  unused  (reads back as written)
//
// APB register map of one SafeTI (byte offsets, 12-bit address space):
//   0x000 CTRL    [0] EN   : start injection (write 1); cleared when done
//                 [1] LOOP : restart from descriptor 0 after the LAST one
//                 [2] ABORT: write 1 to stop after the transfer in flight
//   0x004 STATUS  [0] BUSY, [1] DONE (sticky, cleared by a new start),
//                 [2] ERR (a bus error response was seen, sticky)
//   0x008 BEATS   data beats completed since the last start
//   0x00C DESCS   descriptors completed since the last start
//   0x010 ERRORS  bus error responses since the last start
//   0x800 + 16*i + 4*w : word w of descriptor i
package safeti_pkg;

  localparam int unsigned DATA_W     = 32;   // bus data width
  localparam int unsigned ADDR_W     = 32;   // bus address width
  localparam int unsigned DESC_WORDS = 4;    // 32-bit words per descriptor
  localparam int unsigned APB_AW     = 12;   // APB address bits per SafeTI

  localparam logic [APB_AW-1:0] REG_CTRL   = 12'h000;
  localparam logic [APB_AW-1:0] REG_STATUS = 12'h004;
  localparam logic [APB_AW-1:0] REG_BEATS  = 12'h008;
  localparam logic [APB_AW-1:0] REG_DESCS  = 12'h00C;
  localparam logic [APB_AW-1:0] REG_ERRORS = 12'h010;
  localparam logic [APB_AW-1:0] DESC_BASE  = 12'h800;

  // Decoded descriptor, as carried from the decode stage to execution.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [15:0]       beats_m1;   // beats - 1
    logic [15:0]       reps_m1;    // repetitions - 1
    logic              write;
    logic              last;
  } desc_t;

  // One transfer command from the injector to a bus master interface.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [15:0]       beats_m1;
    logic              write;
  } cmd_t;

  // Unpack the four descriptor words into the decoded form.
  function automatic desc_t decode_desc(input logic [DESC_WORDS*32-1:0] w);
    desc_t d;
    d.write    = w[0];
    d.last     = w[1];
    d.reps_m1  = w[31:16];
    d.addr     = {w[63:34], 2'b00};
    d.beats_m1 = w[79:64];
    return d;
  endfunction

  // Data written by a write beat: derived from the beat address so that a
  // memory checker can verify it.
  function automatic logic [DATA_W-1:0] wdata_of(input logic [ADDR_W-1:0] a);
    return a ^ 32'h5AFE_7100;
  endfunction

endpackage
