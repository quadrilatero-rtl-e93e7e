// quad_scoreboard: tracks data dependencies on the matrix register file.
//
// Every unit reads and writes a matrix register row by row, one row per cycle,
// and never pauses once it has started. A consumer may therefore follow a
// producer as soon as the producer has started: row r is always written
// before the consumer reaches row r. The same holds for a writer that follows
// a reader or another writer. So the scoreboard only has to know, for each
// instruction, whether the accesses that precede it in program order have
// *started*.
//
// It does this with tickets. Per register it counts, modulo 2^TK_W,
//   wseq    writers accepted        wstart  writers that have started writing
//   rseq    source reads accepted   rstart  reads that have started
// When an instruction is accepted (in program order) it takes a snapshot of
// wseq for each source and for md, and of rseq for md; then the counters of
// its own operands advance. Before its unit may begin, the relevant wstart /
// rstart counters must have reached the snapshots (quad_pkg::raw_ok, wr_ok):
//   RAW  every earlier writer of each source has started writing,
//   WAW  every earlier writer of md has started writing,
//   WAR  every earlier reader of md has started reading.
// Because each check looks only at earlier instructions, the execution units
// may start instructions out of program order with respect to each other
// (in order within a unit) without deadlock.
// The paper states only that a scoreboard tracks all data dependencies on the
// register file; this ticket scheme is this design's choice.
//
// Timing: tickets are combinational from the registered counters; events
// update the counters at the clock edge, so a unit sees a start one cycle
// after it happened. The *_now_o outputs also count the starts of the
// current cycle; they serve two checks:
//  - dispatch: an instruction handed to its unit at the end of cycle t makes
//    its first access in t+1 or later, so every check may include starts of
//    cycle t;
//  - the WAR check of a load that starts writing in cycle t itself: register
//    reads are combinational, so a reader of row r in cycle t gets the old
//    row even if the load writes row r at the end of t. RAW and WAW checks
//    made in the starting cycle itself must not include cycle t (a reader
//    would see the old row, two writers would collide on row 0).
module quad_scoreboard
  import quad_pkg::*;
#(
  parameter int unsigned N_RD = 4,
  parameter int unsigned N_WR = 3
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // instruction being accepted, and the same instruction with its tickets
  input  logic     accept_i,
  input  instr_t   instr_i,
  output instr_t   instr_o,
  // events from the execution units
  input  logic     rd_start_valid_i [N_RD],
  input  reg_idx_t rd_start_reg_i   [N_RD],
  input  logic     wr_start_valid_i [N_WR],
  input  reg_idx_t wr_start_reg_i   [N_WR],
  // start counters, for the units' checks
  output tk_vec_t  wstart_o,
  output tk_vec_t  rstart_o,
  // the same plus the starts of the current cycle
  output tk_vec_t  wstart_now_o,
  output tk_vec_t  rstart_now_o
);

  tk_vec_t wseq_q, wstart_q, rseq_q, rstart_q;

  always_comb begin
    instr_o        = instr_i;
    instr_o.tk_md  = wseq_q[instr_i.md];
    instr_o.tk_ms1 = wseq_q[instr_i.ms1];
    instr_o.tk_ms2 = wseq_q[instr_i.ms2];
    instr_o.tk_rd  = rseq_q[instr_i.md];
  end

  tk_vec_t wseq_d, wstart_d, rseq_d, rstart_d;
  always_comb begin
    wseq_d = wseq_q; wstart_d = wstart_q; rseq_d = rseq_q; rstart_d = rstart_q;
    for (int r = 0; r < NREGS; r++) begin
      if (accept_i) begin
        if (writes_md(instr_i) && instr_i.md == reg_idx_t'(r)) wseq_d[r] = wseq_d[r] + 1'b1;
        if (reads_md(instr_i)  && instr_i.md == reg_idx_t'(r)) rseq_d[r] = rseq_d[r] + 1'b1;
        if (instr_i.op == F3_MMAC && instr_i.ms1 == reg_idx_t'(r)) rseq_d[r] = rseq_d[r] + 1'b1;
        if (instr_i.op == F3_MMAC && instr_i.ms2 == reg_idx_t'(r)) rseq_d[r] = rseq_d[r] + 1'b1;
      end
      for (int p = 0; p < N_RD; p++)
        if (rd_start_valid_i[p] && rd_start_reg_i[p] == reg_idx_t'(r)) rstart_d[r] = rstart_d[r] + 1'b1;
      for (int p = 0; p < N_WR; p++)
        if (wr_start_valid_i[p] && wr_start_reg_i[p] == reg_idx_t'(r)) wstart_d[r] = wstart_d[r] + 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wseq_q <= '0; wstart_q <= '0; rseq_q <= '0; rstart_q <= '0;
    end else begin
      wseq_q <= wseq_d; wstart_q <= wstart_d; rseq_q <= rseq_d; rstart_q <= rstart_d;
      // nothing starts that was not accepted
      for (int r = 0; r < NREGS; r++)
        assert (tk_reached(wseq_q[r], wstart_q[r]) && tk_reached(rseq_q[r], rstart_q[r]))
          else $error("m%0d: more starts than accepted accesses", r);
    end
  end

  assign wstart_o = wstart_q;
  assign rstart_o = rstart_q;
  assign wstart_now_o = wstart_d;
  assign rstart_now_o = rstart_d;


endmodule
