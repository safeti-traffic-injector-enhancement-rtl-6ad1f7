// safeti_injector: the pipelined traffic injector of one SafeTI.
//
// The injector walks the descriptor buffer from entry 0 and turns every
// descriptor into REPS+1 transfer commands (address, beat count, direction)
// for a bus master interface. It is split into three stages that work on
// different descriptors at the same time:
//
//   fetch   reads descriptor i from the buffer (the buffer's output register
//           is the fetch/decode pipeline register, valid while f_valid);
//   decode  unpacks descriptor i-1 into a desc_t register (d_valid);
//   execute issues the commands of descriptor i-2 on the cmd_valid/cmd_ready
//           handshake, one per repetition (e_valid, e_rep).
//
// A stage hands its descriptor on in the same cycle the next stage empties,
// so when the execute stage issues the last repetition of one descriptor it
// loads the next in that same edge: commands leave back to back, one per
// cycle if the master accepts one per cycle, and the traffic rate is set by
// the bus only. This overlap of fetch, decode and execution is the change the
// paper describes; the stage contents and the handshake are this design's.
//
// Control: `start` begins at entry 0. The program ends after the descriptor
// with LAST set, or after the final buffer entry. With `loop` set, fetch goes
// back to entry 0 in the cycle it would stop, so looping adds no bubble.
// `abort` empties fetch and decode at once; a command already offered is
// still completed (the handshake may not be withdrawn). `done` pulses one
// cycle when all stages are empty and the master reports `master_idle`;
// `busy` is high from the cycle after start to that pulse. `desc_done` pulses
// when the last command of a descriptor is accepted.
//
// Latency: the first command is offered four cycles after `start`.
module safeti_injector
  import safeti_pkg::*;
#(
  parameter int unsigned N_DESC = 16,
  localparam int unsigned IDX_W = (N_DESC > 1) ? $clog2(N_DESC) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     loop,
  input  logic                     abort,
  output logic                     busy,
  output logic                     done,
  output logic                     desc_done,
  // descriptor buffer, injector side
  output logic                     fetch_en,
  output logic [IDX_W-1:0]         fetch_idx,
  input  logic [DESC_WORDS*32-1:0] fetch_data,
  // transfer commands to the bus master
  output logic                     cmd_valid,
  input  logic                     cmd_ready,
  output cmd_t                     cmd,
  input  logic                     master_idle
);

  logic             running, fetch_on, aborting;
  logic [IDX_W-1:0] fptr;
  // fetch stage
  logic             f_valid;
  logic [IDX_W-1:0] f_idx;
  desc_t            f_desc;
  logic             f_last;
  // decode stage
  logic             d_valid;
  desc_t            d_desc;
  // execute stage
  logic             e_valid;
  desc_t            e_desc;
  logic [15:0]      e_rep;

  logic e_fire, e_end, e_free, d_to_e, d_free, f_to_d, f_free, all_empty;

  assign f_desc = decode_desc(fetch_data);
  assign f_last = f_desc.last || (32'(f_idx) == N_DESC - 1);

  assign e_fire = cmd_valid && cmd_ready;
  assign e_end  = e_fire && (e_rep == e_desc.reps_m1 || aborting);
  assign e_free = !e_valid || e_end;
  assign d_to_e = d_valid && e_free && !aborting;
  assign d_free = !d_valid || d_to_e;
  assign f_to_d = f_valid && d_free && !aborting;
  assign f_free = !f_valid || f_to_d;

  assign fetch_en  = running && fetch_on && !aborting && f_free &&
                     !(f_valid && f_last && !loop);
  assign fetch_idx = (f_valid && f_last) ? '0 : fptr;

  assign cmd_valid = e_valid;
  assign cmd       = '{addr: e_desc.addr, beats_m1: e_desc.beats_m1, write: e_desc.write};
  assign desc_done = e_end;
  assign busy      = running;

  assign all_empty = !f_valid && !d_valid && !e_valid && (!fetch_on || aborting);
  assign done      = running && all_empty && master_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      fetch_on <= 1'b0;
      aborting <= 1'b0;
      fptr     <= '0;
      f_valid  <= 1'b0;
      d_valid  <= 1'b0;
      e_valid  <= 1'b0;
      f_idx    <= '0;
      e_rep    <= '0;
    end else begin
      // fetch
      if (fetch_en) begin
        f_valid <= 1'b1;
        f_idx   <= fetch_idx;
        fptr    <= (32'(fetch_idx) == N_DESC - 1) ? '0 : fetch_idx + 1'b1;
      end else if (f_to_d) begin
        f_valid <= 1'b0;
      end
      if (f_to_d && f_last && !loop) fetch_on <= 1'b0;
      // decode
      if (f_to_d) begin
        d_valid <= 1'b1;
        d_desc  <= f_desc;
      end else if (d_to_e) begin
        d_valid <= 1'b0;
      end
      // execute
      if (d_to_e) begin
        e_valid <= 1'b1;
        e_desc  <= d_desc;
        e_rep   <= '0;
      end else if (e_end) begin
        e_valid <= 1'b0;
      end else if (e_fire) begin
        e_rep   <= e_rep + 1'b1;
      end
      // control
      if (done) begin
        running  <= 1'b0;
        aborting <= 1'b0;
        fetch_on <= 1'b0;
      end
      if (abort && running) begin
        aborting <= 1'b1;
        fetch_on <= 1'b0;
        f_valid  <= 1'b0;
        d_valid  <= 1'b0;
      end
      if (start && !running) begin
        running  <= 1'b1;
        fetch_on <= 1'b1;
        aborting <= 1'b0;
        fptr     <= '0;
        f_valid  <= 1'b0;
        d_valid  <= 1'b0;
        e_valid  <= 1'b0;
      end
    end
  end

  // Handshake rule: an offered command stays offered, unchanged, until taken.
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));

endmodule
