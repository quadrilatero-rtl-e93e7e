// quad_controller: the coprocessor's controller, holding the core interface
// (XIF), the decoder, the scoreboard and the dispatcher.
//
// XIF side. The host RISC-V core offloads an instruction with its two scalar
// operands and an id on the issue channel (valid/ready). The decoder answers
// in the same cycle: accept = 1 for a matrix instruction, which is then
// queued; accept = 0 for anything else, which is dropped. When an accepted
// instruction has finished in its execution unit, its id is returned on the
// result channel (valid/ready), so the core can commit it. This is a reduced
// form of the OpenHW CORE-V-X interface: only the issue and result channels,
// with the operands carried on the issue channel; the field names and widths
// are this design's choice.
//
// Dispatcher. An accepted instruction takes its scoreboard tickets and enters
// the queue of its execution unit (UQ_DEPTH entries each, for the
// permutation unit, the load-store unit and the systolic array). Each queue
// sends its oldest entry to its unit when the unit is ready and the entry's
// dependencies allow it to start:
//   permutation unit, systolic array: RAW, WAW and WAR (quad_pkg::raw_ok, wr_ok);
//   load-store unit: RAW for mst.w; an mld.w is sent at once and the unit
//   itself holds its register-write phase until WAW and WAR allow it.
// The checks include the starts of the current cycle, since a dispatched
// instruction accesses the register file in the next cycle at the earliest.
// So the units run ahead of one another, e.g. loads for the next iteration
// stream in while the systolic array still works on the current one.
// Units report completions (up to four per cycle) into a completion queue of
// CQ_DEPTH entries that feeds the result channel; the core may have at most
// CQ_DEPTH instructions accepted and not yet reported, so it never overflows.
// The per-unit queues and their depths are this design's choices; the paper
// gives the split into XIF, decoder, scoreboard and dispatcher and the three
// execution units.
module quad_controller
  import quad_pkg::*;
#(
  parameter int unsigned UQ_DEPTH = 4,
  parameter int unsigned CQ_DEPTH = 16,
  parameter int unsigned N_CMP    = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // XIF issue channel
  input  logic        x_issue_valid_i,
  output logic        x_issue_ready_o,
  input  logic [31:0] x_issue_instr_i,
  input  logic [31:0] x_issue_rs1_i,
  input  logic [31:0] x_issue_rs2_i,
  input  id_t         x_issue_id_i,
  output logic        x_issue_accept_o,
  // XIF result channel
  output logic        x_result_valid_o,
  input  logic        x_result_ready_i,
  output id_t         x_result_id_o,
  // dispatch to the units
  output instr_t      pu_instr_o,
  output logic        pu_valid_o,
  input  logic        pu_ready_i,
  output instr_t      lsu_instr_o,
  output logic        lsu_valid_o,
  input  logic        lsu_ready_i,
  output instr_t      sa_instr_o,
  output logic        sa_valid_o,
  input  logic        sa_ready_i,
  // completions from the units
  input  logic        cmp_valid_i [N_CMP],
  input  id_t         cmp_id_i    [N_CMP],
  // scoreboard events
  input  logic        rd_start_valid_i [4],
  input  reg_idx_t    rd_start_reg_i   [4],
  input  logic        wr_start_valid_i [3],
  input  reg_idx_t    wr_start_reg_i   [3],
  output tk_vec_t     wstart_o,
  output tk_vec_t     rstart_o,
  output tk_vec_t     rstart_now_o,     // rstart_o plus reads starting this cycle
  // status
  output logic        stall_hazard_o,   // a queue head waits on a register dependency
  output logic        stall_unit_o,     // a queue head waits on its busy unit
  output logic        idle_o            // nothing queued or outstanding
);

  localparam int UQ_W = $clog2(UQ_DEPTH);
  localparam int CQ_W = $clog2(CQ_DEPTH);
  localparam int NU   = 3;   // indexed by unit_e: PU, LSU, SA

  // ---------------- decode and tickets ----------------
  instr_t dec, dec_tk;
  quad_decoder u_dec (
    .instr_i (x_issue_instr_i), .rs1_i (x_issue_rs1_i), .rs2_i (x_issue_rs2_i),
    .id_i (x_issue_id_i), .dec_o (dec)
  );

  logic    accept;
  tk_vec_t wstart, rstart, wstart_now, rstart_now;
  quad_scoreboard u_sb (
    .clk_i, .rst_ni, .accept_i (accept), .instr_i (dec), .instr_o (dec_tk),
    .rd_start_valid_i, .rd_start_reg_i, .wr_start_valid_i, .wr_start_reg_i,
    .wstart_o (wstart), .rstart_o (rstart),
    .wstart_now_o (wstart_now), .rstart_now_o (rstart_now)
  );
  assign rstart_now_o = rstart_now;
  assign wstart_o = wstart;
  assign rstart_o = rstart;

  // ---------------- unit queues ----------------
  instr_t          uq_q   [NU][UQ_DEPTH];
  logic [UQ_W-1:0] uq_rd_q [NU];
  logic [UQ_W-1:0] uq_wr_q [NU];
  logic [UQ_W:0]   uq_cnt_q[NU];
  logic [CQ_W:0]   outst_q;   // accepted, not yet reported

  logic   uq_full [NU];
  logic   uq_push [NU];
  logic   uq_pop  [NU];
  instr_t head    [NU];
  logic   head_v  [NU];
  logic   dep_ok  [NU];
  logic   unit_rdy[NU];
  logic   res_pop;

  always_comb begin
    for (int u = 0; u < NU; u++) begin
      uq_full[u] = (uq_cnt_q[u] == (UQ_W+1)'(UQ_DEPTH));
      head[u]    = uq_q[u][uq_rd_q[u]];
      head_v[u]  = (uq_cnt_q[u] != '0);
    end
  end

  assign x_issue_accept_o = dec.valid;
  assign x_issue_ready_o  = (outst_q != (CQ_W+1)'(CQ_DEPTH))
                            && !(dec.valid && uq_full[dec.unit]);
  assign accept           = x_issue_valid_i && x_issue_ready_o && dec.valid;

  always_comb
    for (int u = 0; u < NU; u++) uq_push[u] = accept && (dec.unit == unit_e'(u));

  // ---------------- dispatch ----------------
  assign unit_rdy[UNIT_PU]  = pu_ready_i;
  assign unit_rdy[UNIT_LSU] = lsu_ready_i;
  assign unit_rdy[UNIT_SA]  = sa_ready_i;

  // a dispatched instruction makes its first register access in the next
  // cycle at the earliest, so the checks include this cycle's starts
  assign dep_ok[UNIT_PU]  = wr_ok(head[UNIT_PU], wstart_now, rstart_now);
  assign dep_ok[UNIT_LSU] = raw_ok(head[UNIT_LSU], wstart_now);
  assign dep_ok[UNIT_SA]  = raw_ok(head[UNIT_SA], wstart_now) && wr_ok(head[UNIT_SA], wstart_now, rstart_now);

  always_comb
    for (int u = 0; u < NU; u++) uq_pop[u] = head_v[u] && dep_ok[u] && unit_rdy[u];

  assign pu_instr_o  = head[UNIT_PU];
  assign lsu_instr_o = head[UNIT_LSU];
  assign sa_instr_o  = head[UNIT_SA];
  assign pu_valid_o  = head_v[UNIT_PU]  && dep_ok[UNIT_PU];
  assign lsu_valid_o = head_v[UNIT_LSU] && dep_ok[UNIT_LSU];
  assign sa_valid_o  = head_v[UNIT_SA]  && dep_ok[UNIT_SA];

  always_comb begin
    stall_hazard_o = 1'b0;
    stall_unit_o   = 1'b0;
    for (int u = 0; u < NU; u++) begin
      if (head_v[u] && !dep_ok[u])                 stall_hazard_o = 1'b1;
      if (head_v[u] && dep_ok[u] && !unit_rdy[u])  stall_unit_o   = 1'b1;
    end
  end

  // queue storage: no reset, an entry is read only after it was written
  always_ff @(posedge clk_i)
    for (int u = 0; u < NU; u++)
      if (uq_push[u]) uq_q[u][uq_wr_q[u]] <= dec_tk;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int u = 0; u < NU; u++) begin
        uq_rd_q[u] <= '0; uq_wr_q[u] <= '0; uq_cnt_q[u] <= '0;
      end
    end else begin
      for (int u = 0; u < NU; u++) begin
        if (uq_push[u]) uq_wr_q[u] <= uq_wr_q[u] + 1'b1;
        if (uq_pop[u]) uq_rd_q[u] <= uq_rd_q[u] + 1'b1;
        uq_cnt_q[u] <= uq_cnt_q[u] + (UQ_W+1)'(uq_push[u]) - (UQ_W+1)'(uq_pop[u]);
      end
    end
  end

  // ---------------- completion queue ----------------
  id_t             cq_q [CQ_DEPTH];
  logic [CQ_W-1:0] cq_rd_q, cq_wr_q;
  logic [CQ_W:0]   cq_cnt_q;

  assign x_result_valid_o = (cq_cnt_q != '0);
  assign x_result_id_o    = cq_q[cq_rd_q];
  assign res_pop          = x_result_valid_o && x_result_ready_i;

  // slot of each completion this cycle: completions are packed in port order
  logic [CQ_W-1:0] cmp_slot [N_CMP];
  logic [CQ_W:0]   cmp_n;
  always_comb begin
    cmp_n = '0;
    for (int c = 0; c < N_CMP; c++) begin
      cmp_slot[c] = cq_wr_q + cmp_n[CQ_W-1:0];
      cmp_n       = cmp_n + (CQ_W+1)'(cmp_valid_i[c]);
    end
  end

  // queue storage: no reset, an entry is read only after it was written
  always_ff @(posedge clk_i)
    for (int c = 0; c < N_CMP; c++)
      if (cmp_valid_i[c]) cq_q[cmp_slot[c]] <= cmp_id_i[c];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cq_rd_q <= '0; cq_wr_q <= '0; cq_cnt_q <= '0; outst_q <= '0;
    end else begin
      cq_wr_q  <= cq_wr_q + cmp_n[CQ_W-1:0];
      if (res_pop) cq_rd_q <= cq_rd_q + 1'b1;
      cq_cnt_q <= cq_cnt_q + cmp_n - (CQ_W+1)'(res_pop);
      outst_q  <= outst_q + (CQ_W+1)'(accept) - (CQ_W+1)'(res_pop);
    end
  end

  assign idle_o = (outst_q == '0);

  // handshake rules of the XIF channels
  logic res_held_q;
  id_t  res_id_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      res_held_q <= 1'b0;
      res_id_q   <= '0;
    end else begin
      res_held_q <= x_result_valid_o && !x_result_ready_i;
      res_id_q   <= x_result_id_o;
      if (res_held_q) assert (x_result_valid_o && x_result_id_o == res_id_q)
        else $error("result withdrawn before it was taken");
      assert (cq_cnt_q <= (CQ_W+1)'(CQ_DEPTH)) else $error("completion queue overflow");
    end
  end

endmodule
