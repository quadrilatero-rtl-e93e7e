// tb_quad_scoreboard: self-checking test of the ticket scoreboard.
//
// Part 1 (directed): the kernel's hazards. After "mld m0" is accepted, an
// "mmac m4, m0, m1" must not pass raw_ok until a write-start event for m0
// arrives; a following "mld m0" must not pass wr_ok until the mmac's read of
// m0 has started (WAR) and must pass once it has; "mz m4" after the mmac must
// wait for the mmac's write of m4 (WAW) and its read of m4 (WAR).
// Part 2 (random): a random stream of accepted instructions and random start
// events, bounded so that nothing starts that was not accepted, is compared
// every cycle against a reference model of the per-register counters (and
// the read-start count that includes the current cycle's events); the
// tickets stamped on each accepted instruction are checked too.
module tb_quad_scoreboard;
  import quad_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     acc;
  instr_t   ins, ins_tk;
  logic     rdv [4];
  reg_idx_t rdr [4];
  logic     wrv [3];
  reg_idx_t wrr [3];
  tk_vec_t  wstart, rstart, rstart_now;
  int checks = 0, failures = 0;

  quad_scoreboard dut (.clk_i(clk), .rst_ni(rst_n), .accept_i(acc), .instr_i(ins), .instr_o(ins_tk),
    .rd_start_valid_i(rdv), .rd_start_reg_i(rdr), .wr_start_valid_i(wrv), .wr_start_reg_i(wrr),
    .wstart_o(wstart), .rstart_o(rstart), .wstart_now_o(), .rstart_now_o(rstart_now));

  initial begin
    #2ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t mk(input int op, md, ms1 = 0, ms2 = 0);
    instr_t i;
    i = '0; i.valid = 1; i.op = funct3_e'(op); i.md = reg_idx_t'(md);
    i.ms1 = reg_idx_t'(ms1); i.ms2 = reg_idx_t'(ms2); i.is_store = (op == 2);
    return i;
  endfunction

  task automatic clear_ev();
    acc = 0; ins = '0;
    foreach (rdv[p]) begin rdv[p] = 0; rdr[p] = '0; end
    foreach (wrv[p]) begin wrv[p] = 0; wrr[p] = '0; end
  endtask

  // accept one instruction at the next edge; returns it with its tickets
  task automatic accept(input instr_t i, output instr_t t);
    @(negedge clk); ins = i; acc = 1; #1 t = ins_tk;
    @(negedge clk); acc = 0;
  endtask

  task automatic ev(input bit wr, input int port, input int r);
    @(negedge clk);
    if (wr) begin wrv[port] = 1; wrr[port] = reg_idx_t'(r); end
    else    begin rdv[port] = 1; rdr[port] = reg_idx_t'(r); end
    @(negedge clk); clear_ev();
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference counters
  int m_wseq [NREGS], m_wst [NREGS], m_rseq [NREGS], m_rst [NREGS];

  initial begin
    instr_t ld0, mm, ld0b, mz4;
    clear_ev();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- directed ----
    accept(mk(1, 0), ld0);
    accept(mk(3, 4, 0, 1), mm);
    accept(mk(1, 0), ld0b);
    accept(mk(0, 4), mz4);
    @(negedge clk);
    check(wr_ok(ld0, wstart, rstart), "first mld m0 free to write");
    check(!raw_ok(mm, wstart), "mmac waits for the load of m0 (RAW)");
    check(!wr_ok(ld0b, wstart, rstart), "second mld m0 waits (WAW)");
    ev(1, 1, 0);                       // load of m0 starts writing
    check(raw_ok(mm, wstart), "mmac free after the load started");
    check(!wr_ok(ld0b, wstart, rstart), "second mld m0 waits for the mmac's read (WAR)");
    ev(0, 2, 1);                       // unrelated register read
    check(!wr_ok(ld0b, wstart, rstart), "read of m1 does not release m0");
    ev(0, 1, 0);                       // mmac starts reading m0
    check(wr_ok(ld0b, wstart, rstart), "second mld m0 free after the read started");
    check(!wr_ok(mz4, wstart, rstart), "mz m4 waits for the mmac (WAW, WAR)");
    ev(0, 2, 4);                       // mmac reads m4 (accumulator)
    check(!wr_ok(mz4, wstart, rstart), "mz m4 still waits for the mmac's write (WAW)");
    ev(1, 0, 4);                       // mmac starts writing m4
    check(wr_ok(mz4, wstart, rstart), "mz m4 free");

    // ---- random against the model ----
    rst_n = 0; @(negedge clk); rst_n = 1;
    foreach (m_wseq[r]) begin m_wseq[r] = 0; m_wst[r] = 0; m_rseq[r] = 0; m_rst[r] = 0; end
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int pend_w [NREGS], pend_r [NREGS];
      @(negedge clk);
      clear_ev();
      foreach (pend_w[r]) begin pend_w[r] = m_wseq[r] - m_wst[r]; pend_r[r] = m_rseq[r] - m_rst[r]; end
      // random events for accesses already accepted
      foreach (rdv[p]) begin
        int r = $urandom_range(0, NREGS-1);
        if (pend_r[r] > 0 && $urandom_range(0, 1)) begin rdv[p] = 1; rdr[p] = reg_idx_t'(r); pend_r[r]--; end
      end
      foreach (wrv[p]) begin
        int r = $urandom_range(0, NREGS-1);
        if (pend_w[r] > 0 && $urandom_range(0, 1)) begin wrv[p] = 1; wrr[p] = reg_idx_t'(r); pend_w[r]--; end
      end
      // random accepted instruction, bounded so counters stay within range
      if ($urandom_range(0, 2) != 0) begin
        int op = $urandom_range(0, 3);
        ins = mk(op, $urandom_range(0, 7), $urandom_range(0, 7), $urandom_range(0, 7));
        if (pend_w[ins.md] < 60 && pend_r[ins.md] < 60 && pend_r[ins.ms1] < 60 && pend_r[ins.ms2] < 60)
          acc = 1;
      end
      #1;
      if (acc) begin
        check(ins_tk.tk_md == tk_t'(m_wseq[ins.md]) && ins_tk.tk_ms1 == tk_t'(m_wseq[ins.ms1])
              && ins_tk.tk_ms2 == tk_t'(m_wseq[ins.ms2]) && ins_tk.tk_rd == tk_t'(m_rseq[ins.md]),
              "tickets");
        if (ins.op != F3_MST) m_wseq[ins.md]++;
        if (ins.op == F3_MST || ins.op == F3_MMAC) m_rseq[ins.md]++;
        if (ins.op == F3_MMAC) begin m_rseq[ins.ms1]++; m_rseq[ins.ms2]++; end
      end
      foreach (rdv[p]) if (rdv[p]) m_rst[rdr[p]]++;
      foreach (wrv[p]) if (wrv[p]) m_wst[wrr[p]]++;
      for (int r = 0; r < NREGS; r++)
        check(rstart_now[r] == tk_t'(m_rst[r]), "read starts including this cycle");
      @(posedge clk); #1;
      for (int r = 0; r < NREGS; r++)
        check(wstart[r] == tk_t'(m_wst[r]) && rstart[r] == tk_t'(m_rst[r]), "start counters");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
