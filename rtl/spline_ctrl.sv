// spline_ctrl: control logic (FSM) of the pulse shaper.
//
// A pulse is a run of seg_num consecutive segments of the segment memory starting at
// start_addr. With pulse_sym set, the pulse is mirrored about its end: after the stored
// segments have been played forwards, they are replayed backwards in reverse order
// (segment seg_num-1 first), so only half of the pulse is stored. The paper describes both
// the segment stitching and the mirrored replay; the exact schedule below is this
// design's own.
// The FSM walks a "visit" sequence: forward 0..seg_num-1, then, when mirrored, backward
// seg_num-1..0. For every clock of a visit it issues one control word for stage 0 of the
// pipeline (ctrl0, idx0), so that one sample is produced per clock with no gap between
// segments ("stitching"):
//   forward visit : slot 0 LOAD, slots 1..N-1 ADD
//   backward visit: SUB on every slot
//   the last slot of any visit followed by a backward visit is a TURN instead, which
//   reloads the pipeline with the final values of the backward segment.
// Coefficients are prefetched: at every load event (a forward slot 0, or a TURN between
// two backward visits) the memory read for the following visit is issued, so its word is in the memory output
// register by the next load event (the centre segment is not read again). A read of start_addr is issued in the cycle start is
// accepted, so stage 0 starts one clock after it.
// N is the segment's length in samples, read from memory with the coefficients; a length
// of 0 is treated as 1. start_pulse is accepted only when idle and seg_num > 0; a mirrored
// pulse may hold at most SYM_DEPTH stored segments.
module spline_ctrl
  import spline_pkg::*;
#(
  parameter int unsigned SEG_AW = 10
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start_pulse,
  input  logic [SEG_AW-1:0] start_addr,
  input  logic [SEG_AW:0]   seg_num,
  input  logic              pulse_sym,
  input  logic              accept_ok,   // the previous pulse has fully left the pipeline
  output logic              started,     // start accepted this cycle
  output logic              busy,
  // segment memory read port
  output logic              rd_en,
  output logic [SEG_AW-1:0] rd_addr,
  input  seglen_t           mem_len,     // length field of the memory output register
  // stage-0 control
  output ctrl_t             ctrl0,
  output symidx_t           idx0
);

  typedef enum logic [1:0] {S_IDLE, S_RUN} state_e;

  typedef struct packed {
    logic [SEG_AW:0] idx;   // segment index relative to start_addr
    logic            fwd;
    logic            fin;   // no visit (end of sequence)
  } visit_t;

  state_e           state;
  logic [SEG_AW-1:0] base;
  logic [SEG_AW:0]   nseg;
  logic              sym;
  visit_t            cur, rdp;      // current visit, next visit to read
  seglen_t           slot, len_reg;

  // successor of a visit in the sequence. For the read sequence (rd set) the backward
  // visit of the centre segment is skipped: its length and delta are those of the forward
  // visit just played, which the controller and coef_regs still hold.
  function automatic visit_t next_visit(input visit_t v, input logic [SEG_AW:0] n,
                                        input logic s, input logic rd);
    visit_t r;
    r = v;
    if (v.fwd) begin
      if (v.idx + 1'b1 < n) r.idx = v.idx + 1'b1;
      else if (s) begin                              // turn at the symmetry centre
        r.fwd = 1'b0;
        if (rd) begin
          if (v.idx != '0) r.idx = v.idx - 1'b1;
          else             r.fin = 1'b1;
        end
      end
      else                  r.fin = 1'b1;
    end else begin
      if (v.idx != '0) r.idx = v.idx - 1'b1;
      else             r.fin = 1'b1;
    end
    return r;
  endfunction

  visit_t  nxt;
  seglen_t len;
  logic    first, last, turn, load_ev;


  assign nxt   = next_visit(cur, nseg, sym, 1'b0);
  assign first = cur.fwd && (slot == '0);
  assign len   = first ? ((mem_len == '0) ? seglen_t'(1) : mem_len) : len_reg;
  assign last  = (slot == len - 1'b1);
  assign turn  = last && !nxt.fin && !nxt.fwd;
  // read events: every forward load and every turn between two backward visits (the turn at
  // the centre reloads values the pipeline already has and needs no memory word)
  assign load_ev = (state == S_RUN) && (first || (turn && !cur.fwd));

  assign started = (state == S_IDLE) && start_pulse && accept_ok && (seg_num != '0);
  assign busy    = (state != S_IDLE);

  // memory reads: the first segment at start, then one visit ahead at every load event
  always_comb begin
    rd_en   = 1'b0;
    rd_addr = base + rdp.idx[SEG_AW-1:0];
    if (started) begin
      rd_en   = 1'b1;
      rd_addr = start_addr;
    end else if (load_ev && !rdp.fin) begin
      rd_en = 1'b1;
    end
  end

  always_comb begin
    ctrl0 = '0;
    idx0  = '0;
    if (state == S_RUN) begin
      ctrl0.valid  = 1'b1;
      ctrl0.fwd    = cur.fwd;
      ctrl0.first  = first;
      ctrl0.cap    = cur.fwd && last && sym;
      ctrl0.turn   = turn;
      ctrl0.bypass = turn && cur.fwd;
      ctrl0.last   = last && nxt.fin;
      if (turn)          ctrl0.op = OP_TURN;
      else if (!cur.fwd) ctrl0.op = OP_SUB;
      else if (first)    ctrl0.op = OP_LOAD;
      else               ctrl0.op = OP_ADD;
      // store index: the segment saved (forward) or the segment turned to (backward)
      idx0 = symidx_t'((turn && !cur.fwd) ? nxt.idx : cur.idx);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      base    <= '0;
      nseg    <= '0;
      sym     <= 1'b0;
      cur     <= '0;
      rdp     <= '0;
      slot    <= '0;
      len_reg <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (started) begin
          state <= S_RUN;
          base  <= start_addr;
          nseg  <= seg_num;
          sym   <= pulse_sym;
          cur   <= '{idx: '0, fwd: 1'b1, fin: 1'b0};
          rdp   <= next_visit('{idx: '0, fwd: 1'b1, fin: 1'b0}, seg_num, pulse_sym, 1'b1);
          slot  <= '0;
        end
        S_RUN: begin
          if (load_ev && !rdp.fin) rdp <= next_visit(rdp, nseg, sym, 1'b1);
          if (first) len_reg <= len;
          if (last) begin
            slot <= '0;
            if (nxt.fin) state <= S_IDLE;
            else begin
              cur <= nxt;
              // a backward visit's length: at the centre the current one, otherwise the
              // prefetched word
              if (!nxt.fwd) len_reg <= cur.fwd ? len
                                     : ((mem_len == '0) ? seglen_t'(1) : mem_len);
            end
          end else begin
            slot <= slot + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a mirrored pulse must fit the turn-around store
  a_symdepth: assert property (@(posedge clk) disable iff (rst)
                               started && pulse_sym |-> seg_num <= (SEG_AW+1)'(SYM_DEPTH));

endmodule
