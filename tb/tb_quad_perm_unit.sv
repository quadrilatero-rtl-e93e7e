// tb_quad_perm_unit: issues mz instructions back to back and with gaps; checks
// that each writes zero to rows 0..3 of its register on consecutive cycles,
// that done pulses on the fourth row and that back-to-back mz take 4 cycles each.
module tb_quad_perm_unit;
  import quad_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, done;
  instr_t ins;
  mrf_wr_t wr;
  reg_idx_t dreg;
  id_t did;
  quad_perm_unit dut (.clk_i(clk), .rst_ni(rst_n), .issue_valid_i(iv), .issue_ready_o(ir),
    .issue_i(ins), .wr_o(wr), .start_o(), .done_o(done), .done_reg_o(dreg), .done_id_o(did));

  int checks = 0, failures = 0;
  int cyc = 0;
  // expected write stream
  int exp_reg [$];
  int exp_row [$];
  int done_cnt = 0;
  int last_done = -1;
  int intervals_ok = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && wr.en) begin
      checks++;
      if (exp_reg.size() == 0 || wr.data != '0 || int'(wr.rg) != exp_reg[0] || int'(wr.row) != exp_row[0]) begin
        failures++;
        $display("FAIL write m%0d row %0d exp size %0d data %0d t=%0t", wr.rg, wr.row, exp_reg.size(), wr.data != 0, $time);
      end
      if (exp_reg.size() > 0) begin
        void'(exp_reg.pop_front()); void'(exp_row.pop_front());
      end
    end
    if (rst_n && done) begin
      checks++;
      if (wr.row != 2'd3 || !wr.en || dreg != wr.rg) begin failures++; $display("FAIL done timing"); end
      done_cnt <= done_cnt + 1;
      last_done <= cyc;
      if (last_done >= 0 && done_cnt < 4 && cyc - last_done == 4) intervals_ok <= intervals_ok + 1;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mz(input int r, input int id);
    ins = '0; ins.valid = 1; ins.unit = UNIT_PU; ins.op = F3_MZ;
    ins.md = reg_idx_t'(r); ins.id = id_t'(id);
    @(negedge clk);
    iv = 1;
    while (!ir) @(negedge clk);
    @(posedge clk);                       // accepted at this edge
    for (int w = 0; w < NROWS; w++) begin exp_reg.push_back(r); exp_row.push_back(w); end
    #1 iv = 0;
  endtask

  initial begin
    iv = 0; ins = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // back to back: m4, m6, m5, m7 as in the paper's schedule
    mz(4, 0); mz(6, 1); mz(5, 2); mz(7, 3);
    repeat (6) @(posedge clk);
    for (int i = 0; i < 20; i++) begin
      mz($urandom % 8, i);
      repeat ($urandom % 6) @(posedge clk);
    end
    repeat (8) @(posedge clk);
    checks++;
    if (done_cnt != 24) begin failures++; $display("FAIL done count %0d", done_cnt); end
    checks++;
    if (intervals_ok != 3) begin failures++; $display("FAIL back-to-back interval %0d", intervals_ok); end
    checks++;
    if (exp_reg.size() != 0) begin failures++; $display("FAIL missing writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
