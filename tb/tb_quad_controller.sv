// tb_quad_controller: self-checking test of the controller (XIF, decoder,
// scoreboard, unit queues, dispatch, completion queue).
//
// The execution units are replaced by the testbench, which drives their ready
// signals, start events and completions directly. Checked:
//   - an illegal word is answered with accept = 0 and never dispatched;
//   - each instruction goes to its own unit, with its scalar operands;
//   - an mmac that depends on a load waits (stall_hazard_o) until the load
//     reports its write start, while an independent mz is dispatched to the
//     permutation unit ahead of it;
//   - a ready head held by a busy unit raises stall_unit_o;
//   - a unit queue of UQ_DEPTH entries back-pressures the issue channel;
//   - completions from several units in one cycle come out on the result
//     channel one per cycle, in port order, and hold under back-pressure;
//   - at most CQ_DEPTH instructions are outstanding; idle_o when none are.
module tb_quad_controller;
  import quad_pkg::*;
  import tb_quad_isa_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        iv, ir, acc, rv, rr;
  logic [31:0] instr, rs1, rs2;
  id_t         id, rid;
  instr_t      pu_i, lsu_i, sa_i;
  logic        pu_v, pu_r, lsu_v, lsu_r, sa_v, sa_r;
  logic        cv [4];
  id_t         cid [4];
  logic        rdv [4];
  reg_idx_t    rdr [4];
  logic        wrv [3];
  reg_idx_t    wrr [3];
  tk_vec_t     wstart, rstart;
  logic        st_haz, st_unit, idle;
  int checks = 0, failures = 0;

  // the permutation unit stand-in reports its write start one cycle after it
  // takes an mz, on write port 2
  logic     pu_ev;
  reg_idx_t pu_ev_r;
  logic     wr_all  [3];
  reg_idx_t wrr_all [3];
  always @(posedge clk) begin
    pu_ev   <= pu_v && pu_r;
    pu_ev_r <= pu_i.md;
  end
  always_comb begin
    wr_all  = wrv;
    wrr_all = wrr;
    if (pu_ev) begin wr_all[2] = 1'b1; wrr_all[2] = pu_ev_r; end
  end

  quad_controller dut (.clk_i(clk), .rst_ni(rst_n),
    .x_issue_valid_i(iv), .x_issue_ready_o(ir), .x_issue_instr_i(instr), .x_issue_rs1_i(rs1),
    .x_issue_rs2_i(rs2), .x_issue_id_i(id), .x_issue_accept_o(acc),
    .x_result_valid_o(rv), .x_result_ready_i(rr), .x_result_id_o(rid),
    .pu_instr_o(pu_i), .pu_valid_o(pu_v), .pu_ready_i(pu_r),
    .lsu_instr_o(lsu_i), .lsu_valid_o(lsu_v), .lsu_ready_i(lsu_r),
    .sa_instr_o(sa_i), .sa_valid_o(sa_v), .sa_ready_i(sa_r),
    .cmp_valid_i(cv), .cmp_id_i(cid),
    .rd_start_valid_i(rdv), .rd_start_reg_i(rdr), .wr_start_valid_i(wr_all), .wr_start_reg_i(wrr_all),
    .wstart_o(wstart), .rstart_o(rstart), .rstart_now_o(),
    .stall_hazard_o(st_haz), .stall_unit_o(st_unit), .idle_o(idle));

  initial begin
    #2ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic clear();
    foreach (cv[p])  begin cv[p] = 0; cid[p] = '0; end
    foreach (rdv[p]) begin rdv[p] = 0; rdr[p] = '0; end
    foreach (wrv[p]) begin wrv[p] = 0; wrr[p] = '0; end
  endtask

  // offer one word on the issue channel; waits for ready; returns accept
  task automatic offload(input logic [31:0] w, input int i, output bit a);
    @(negedge clk);
    instr = w; id = id_t'(i); rs1 = 32'h1000 + i; rs2 = 32'd64; iv = 1;
    #1 while (!ir) begin @(negedge clk); #1; end
    a = acc;
    @(posedge clk); #1 iv = 0;
  endtask

  initial begin
    bit a;
    int got [$];
    iv = 0; rr = 1; pu_r = 0; lsu_r = 0; sa_r = 0; instr = '0; rs1 = '0; rs2 = '0; id = '0;
    clear();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(idle, "idle after reset");

    // illegal word
    offload(32'h0000_0033, 15, a);
    check(!a, "illegal word not accepted");
    @(negedge clk);
    check(!pu_v && !lsu_v && !sa_v && idle, "illegal word not dispatched");

    // mld m0 ; mmac m4,m0,m1 ; mz m5   (units not ready yet)
    offload(enc_mld(0), 1, a);            check(a, "mld accepted");
    offload(enc_mmac(4, 0, 1, 0), 2, a);  check(a, "mmac accepted");
    offload(enc_mz(5), 3, a);             check(a, "mz accepted");
    @(negedge clk);
    check(!idle, "not idle with work outstanding");
    check(lsu_v && lsu_i.op == F3_MLD && lsu_i.md == 0 && lsu_i.id == 1
          && lsu_i.rs1 == 32'h1001 && lsu_i.rs2 == 64, "mld offered to the LSU with its operands");
    check(pu_v && pu_i.op == F3_MZ && pu_i.md == 5, "independent mz offered to the PU");
    check(!sa_v && st_haz, "mmac held by RAW on m0");
    check(st_unit, "unit stall flagged while the LSU and PU are busy");
    // the PU takes the mz ahead of the mmac
    pu_r = 1; @(negedge clk); pu_r = 0;
    check(!pu_v, "mz dispatched");
    lsu_r = 1; @(negedge clk); lsu_r = 0;
    check(!lsu_v, "mld dispatched");
    repeat (3) @(negedge clk);
    check(!sa_v, "mmac still waits while the load has not started writing");
    wrv[1] = 1; wrr[1] = 0; @(negedge clk); clear();
    @(negedge clk);
    check(sa_v && sa_i.md == 4 && sa_i.ms1 == 0 && sa_i.ms2 == 1, "mmac offered after the load started");
    sa_r = 1; @(negedge clk); sa_r = 0;
    check(!sa_v, "mmac dispatched");
    // the array reports its reads of m1, m0, m4 and its write of m4
    rdv[0] = 1; rdr[0] = 1; rdv[1] = 1; rdr[1] = 0; rdv[2] = 1; rdr[2] = 4;
    wrv[0] = 1; wrr[0] = 4;
    @(negedge clk); clear();

    // completions in one cycle from three units; result channel back-pressure
    rr = 0;
    cv[0] = 1; cid[0] = 3; cv[1] = 1; cid[1] = 1; cv[3] = 1; cid[3] = 2;
    @(negedge clk); clear();
    repeat (3) begin
      check(rv && rid == 3, "first completion held under back-pressure");
      @(negedge clk);
    end
    rr = 1;
    while (rv) begin got.push_back(int'(rid)); @(negedge clk); end
    check(got.size() == 3 && got[0] == 3 && got[1] == 1 && got[2] == 2, "results in port order");
    check(idle, "idle after all results");

    // unit queue back-pressure: four mz fill the PU queue, the fifth waits
    fork
      begin
        for (int n = 0; n < 5; n++) offload(enc_mz(n), n, a);
      end
      begin
        repeat (12) @(negedge clk);
        check(iv && !ir, "issue blocked by the full PU queue");
        pu_r = 1;
      end
    join
    repeat (6) @(negedge clk);
    pu_r = 0;
    check(!pu_v, "PU queue drained");
    // these five are outstanding; add eleven more to reach CQ_DEPTH = 16
    pu_r = 1;
    for (int n = 0; n < 11; n++) offload(enc_mz(n % 8), 5 + n, a);
    @(negedge clk);
    @(negedge clk);
    instr = enc_mz(0); iv = 1; #1;
    check(!ir, "issue blocked with CQ_DEPTH instructions outstanding");
    iv = 0; pu_r = 0; rr = 0;
    for (int n = 0; n < 16; n++) begin
      cv[2] = 1; cid[2] = id_t'(n); @(negedge clk);
    end
    clear();
    rr = 1;
    got.delete();
    while (rv) begin got.push_back(int'(rid)); @(negedge clk); end
    check(got.size() == 16, $sformatf("sixteen results returned (got %0d)", got.size()));
    foreach (got[n]) check(got[n] == n, "result order");
    @(negedge clk);
    check(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
