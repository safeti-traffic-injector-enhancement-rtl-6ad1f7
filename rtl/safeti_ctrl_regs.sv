// safeti_ctrl_regs: APB slave with the control and status registers of one
// SafeTI, and the APB window onto its descriptor buffer.
//
// The APB port is the configuration path: software writes descriptors and
// control registers here, never through the data bus the injector loads. The
// register map is given in safeti_pkg. Writing CTRL.EN=1 while idle pulses
// `start`; CTRL.ABORT=1 while busy pulses `abort`; CTRL.LOOP is a level. The
// BEATS, DESCS and ERRORS counters clear on start and count the injector's
// progress; STATUS.DONE and STATUS.ERR are sticky until the next start.
//
// APB timing: PREADY is always 1 (no wait states). Descriptor words are read
// from the synchronous buffer port, which is issued in the setup phase so
// that the word is ready in the access phase. An access to a descriptor index
// at or above N_DESC, or to an undefined register, answers with PSLVERR.
//
// The use of APB and the existence of control registers follow the paper;
// every bit of the map is this design's choice.
module safeti_ctrl_regs
  import safeti_pkg::*;
#(
  parameter int unsigned N_DESC = 16,
  localparam int unsigned IDX_W = (N_DESC > 1) ? $clog2(N_DESC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // APB slave
  input  logic              psel,
  input  logic              penable,
  input  logic [APB_AW-1:0] paddr,
  input  logic              pwrite,
  input  logic [31:0]       pwdata,
  output logic [31:0]       prdata,
  output logic              pready,
  output logic              pslverr,
  // descriptor buffer, APB side
  output logic              dbuf_wr_en,
  output logic [IDX_W-1:0]  dbuf_idx,
  output logic [1:0]        dbuf_word,
  output logic [31:0]       dbuf_wr_data,
  output logic              dbuf_rd_en,
  input  logic [31:0]       dbuf_rd_data,
  // traffic injector
  output logic              start,
  output logic              loop,
  output logic              abort,
  input  logic              busy,
  input  logic              done,
  input  logic              desc_inc,
  input  logic [1:0]        beat_inc,
  input  logic [1:0]        err_inc
);

  logic        done_q, err_q;
  logic [31:0] beats_q, descs_q, errors_q;

  logic is_desc, desc_ok, reg_ok, acc, wr_acc;
  assign is_desc = (paddr & DESC_BASE) != '0;   // descriptor window: paddr[11] set
  // descriptor index = paddr[10:4], word = paddr[3:2]
  assign desc_ok = is_desc && (32'(paddr[APB_AW-2:4]) < N_DESC);
  always_comb begin
    unique case (paddr)
      REG_CTRL, REG_STATUS, REG_BEATS, REG_DESCS, REG_ERRORS: reg_ok = 1'b1;
      default: reg_ok = 1'b0;
    endcase
  end
  assign acc    = psel && penable;
  assign wr_acc = acc && pwrite;

  assign dbuf_idx     = IDX_W'(paddr[APB_AW-2:4]);
  assign dbuf_word    = paddr[3:2];
  assign dbuf_wr_data = pwdata;
  assign dbuf_wr_en   = wr_acc && desc_ok;
  assign dbuf_rd_en   = psel && !penable && !pwrite && desc_ok;

  assign start = wr_acc && !is_desc && paddr == REG_CTRL && pwdata[0] && !busy;
  assign abort = wr_acc && !is_desc && paddr == REG_CTRL && pwdata[2] && busy;

  assign pready  = 1'b1;
  assign pslverr = acc && !(is_desc ? desc_ok : reg_ok);

  always_comb begin
    prdata = '0;
    if (is_desc) prdata = desc_ok ? dbuf_rd_data : '0;
    else begin
      unique case (paddr)
        REG_CTRL:   prdata = {29'd0, 1'b0, loop, busy};
        REG_STATUS: prdata = {29'd0, err_q, done_q, busy};
        REG_BEATS:  prdata = beats_q;
        REG_DESCS:  prdata = descs_q;
        REG_ERRORS: prdata = errors_q;
        default:    prdata = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loop     <= 1'b0;
      done_q   <= 1'b0;
      err_q    <= 1'b0;
      beats_q  <= '0;
      descs_q  <= '0;
      errors_q <= '0;
    end else begin
      if (wr_acc && !is_desc && paddr == REG_CTRL) loop <= pwdata[1];
      if (start) begin
        done_q   <= 1'b0;
        err_q    <= 1'b0;
        beats_q  <= '0;
        descs_q  <= '0;
        errors_q <= '0;
      end else begin
        if (done) done_q <= 1'b1;
        if (err_inc != 2'd0) err_q <= 1'b1;
        beats_q  <= beats_q + 32'(beat_inc);
        descs_q  <= descs_q + 32'(desc_inc);
        errors_q <= errors_q + 32'(err_inc);
      end
    end
  end

  // APB rule: with no wait states an access phase lasts one cycle, after
  // which PENABLE falls (next transfer's setup phase, or idle).
  a_apb_access: assert property (@(posedge clk) disable iff (!rst_n)
                                 psel && penable |=> !penable);

endmodule
