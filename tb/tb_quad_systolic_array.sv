// tb_quad_systolic_array: drives the systolic array with a register-file model
// and checks mmac results in all four data types against a reference, the
// 12-cycle latency of one mmac and the 4-cycle issue interval of a sequence.
module tb_quad_systolic_array;
  import quad_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       iv, ir;
  instr_t     ins;
  mrf_raddr_t aw, aa, ac;
  row_t       dw, da, dc;
  mrf_wr_t    wr;
  logic       wl_d, fd_d, wb_s, wb_d, busy;
  reg_idx_t   wl_r, fd_1, fd_m, wb_m;
  id_t        wb_id;

  quad_systolic_array dut (
    .clk_i(clk), .rst_ni(rst_n), .issue_valid_i(iv), .issue_ready_o(ir), .issue_i(ins),
    .rd_w_addr_o(aw), .rd_w_data_i(dw), .rd_a_addr_o(aa), .rd_a_data_i(da),
    .rd_c_addr_o(ac), .rd_c_data_i(dc), .wr_o(wr),
    .ev_wl_start_o(wl_d), .ev_wl_reg_o(wl_r), .ev_fd_start_o(fd_d), .ev_fd_ms1_o(fd_1),
    .ev_fd_md_o(fd_m), .ev_wb_start_o(wb_s), .ev_wb_done_o(wb_d), .ev_wb_md_o(wb_m), .ev_wb_id_o(wb_id),
    .busy_o(busy));

  // register file model
  logic [31:0] mrf [NREGS][NROWS][NROWS];
  always_comb begin
    for (int e = 0; e < NROWS; e++) begin
      dw[32*e +: 32] = mrf[aw.rg][aw.row][e];
      da[32*e +: 32] = mrf[aa.rg][aa.row][e];
      dc[32*e +: 32] = mrf[ac.rg][ac.row][e];
    end
  end
  always_ff @(posedge clk)
    if (wr.en) for (int e = 0; e < NROWS; e++) mrf[wr.rg][wr.row][e] <= wr.data[32*e +: 32];

  int checks = 0, failures = 0;
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;
  int issue_cyc [16];
  int done_cyc  [16];
  // acceptance edge and the edge that ends the last write-back cycle
  always_ff @(posedge clk) begin
    if (iv && ir) issue_cyc[ins.id] <= cyc;
    if (wb_d)     done_cyc[wb_id]   <= cyc;
  end
  // every accepted mmac gives exactly one pulse of each scoreboard event
  int n_acc = 0, n_wl = 0, n_fd = 0, n_wbs = 0, n_wbd = 0;
  always @(posedge clk) begin
    if (iv && ir) n_acc++;
    if (wl_d) n_wl++;
    if (fd_d) n_fd++;
    if (wb_s) n_wbs++;
    if (wb_d) n_wbd++;
  end

  logic [31:0] expm [NREGS][NROWS][NROWS];

  task automatic fill(input int r, input int dt);
    for (int i = 0; i < NROWS; i++)
      for (int j = 0; j < NROWS; j++)
        mrf[r][i][j] = (dt == 0) ? rand_f32() : $urandom;
  endtask

  // reference: md[i][j] = (((md + a0*w0) + a1*w1) + a2*w2) + a3*w3
  task automatic ref_mmac(input int md, ms1, ms2, dt);
    for (int i = 0; i < NROWS; i++)
      for (int j = 0; j < NROWS; j++) begin
        logic [31:0] acc;
        acc = mrf[md][i][j];
        for (int k = 0; k < NROWS; k++) acc = mac_ref(dt, mrf[ms1][i][k], mrf[ms2][j][k], acc);
        expm[md][i][j] = acc;
      end
  endtask

  task automatic issue(input int md, ms1, ms2, dt, id);
    ins = '0;
    ins.valid = 1; ins.unit = UNIT_SA; ins.op = F3_MMAC;
    ins.md = reg_idx_t'(md); ins.ms1 = reg_idx_t'(ms1); ins.ms2 = reg_idx_t'(ms2);
    ins.dtype = dtype_e'(dt); ins.id = id_t'(id);
    @(negedge clk);
    iv = 1;
    while (!ir) @(negedge clk);
    @(posedge clk);                       // accepted at this edge
    #1 iv = 0;
  endtask

  task automatic compare(input int md);
    for (int i = 0; i < NROWS; i++)
      for (int j = 0; j < NROWS; j++) begin
        checks++;
        if (mrf[md][i][j] !== expm[md][i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL m%0d[%0d][%0d] got %h exp %h", md, i, j, mrf[md][i][j], expm[md][i][j]);
        end
      end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; ins = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int rnd = 0; rnd < 40; rnd++) begin
      int dt;
      dt = rnd % 4;
      for (int r = 0; r < NREGS; r++) fill(r, dt);
      // the inner-loop pattern of the paper's kernel: four independent mmacs
      ref_mmac(4, 0, 1, dt); ref_mmac(6, 2, 1, dt); ref_mmac(5, 0, 3, dt); ref_mmac(7, 2, 3, dt);
      @(posedge clk); #1;
      issue(4, 0, 1, dt, 0); issue(6, 2, 1, dt, 1); issue(5, 0, 3, dt, 2); issue(7, 2, 3, dt, 3);
      @(posedge clk);
      while (busy) @(posedge clk);
      compare(4); compare(5); compare(6); compare(7);
      // one mmac takes 12 cycles; back-to-back mmacs start every 4 cycles
      for (int n = 0; n < 4; n++) begin
        checks++;
        if (done_cyc[n] - issue_cyc[n] != 12) begin
          failures++; $display("FAIL latency %0d", done_cyc[n] - issue_cyc[n]);
        end
      end
      for (int n = 1; n < 4; n++) begin
        checks++;
        if (issue_cyc[n] - issue_cyc[n-1] != 4) begin
          failures++; $display("FAIL issue interval %0d", issue_cyc[n] - issue_cyc[n-1]);
        end
      end
    end
    checks++;
    if (n_wl != n_acc || n_fd != n_acc || n_wbs != n_acc || n_wbd != n_acc) begin
      failures++;
      $display("FAIL events: accepted %0d, wl %0d, fd %0d, wb start %0d, wb done %0d",
               n_acc, n_wl, n_fd, n_wbs, n_wbd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
