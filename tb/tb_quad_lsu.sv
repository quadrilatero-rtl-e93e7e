// tb_quad_lsu: the load-store unit against a register-file model and the
// banked memory model. Loads matrices with strided rows, stores them back to
// other places, and checks both sides. Also checks that back-to-back loads
// keep the memory port busy (about four cycles per mld), that a store issued
// behind a load of the same register sees the loaded data (loads and stores
// are not mixed), and correct operation under random memory stalls.
module tb_quad_lsu;
  import quad_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic iv, ir;
  instr_t ins;
  mrf_raddr_t ra;
  row_t rdata;
  mrf_wr_t wr;
  logic req, we, gnt, rvalid;
  logic [31:0] addr;
  row_t wdata, mrdata;
  logic ld_start, ld_done, st_read, st_done, busy;
  reg_idx_t ld_reg, st_reg;
  id_t ld_id, st_id;
  int stall_pct = 0, stalls;

  quad_lsu dut (.clk_i(clk), .rst_ni(rst_n), .issue_valid_i(iv), .issue_ready_o(ir), .issue_i(ins),
    .rd_addr_o(ra), .rd_data_i(rdata), .wr_o(wr),
    .mem_req_o(req), .mem_we_o(we), .mem_addr_o(addr), .mem_wdata_o(wdata),
    .mem_gnt_i(gnt), .mem_rvalid_i(rvalid), .mem_rdata_i(mrdata),
    .wstart_i('0), .rstart_i('0), .ld_start_o(ld_start),
    .ld_done_o(ld_done), .ld_reg_o(ld_reg), .ld_id_o(ld_id), .st_read_o(st_read),
    .st_reg_o(st_reg), .st_done_o(st_done), .st_id_o(st_id), .busy_o(busy));

  tb_mem_model mem (.clk_i(clk), .stall_pct_i(stall_pct), .req_i(req), .we_i(we), .addr_i(addr),
    .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(mrdata), .stalls_o(stalls));

  row_t mrf [NREGS][NROWS];
  assign rdata = mrf[ra.rg][ra.row];
  always @(posedge clk) if (wr.en) mrf[wr.rg][wr.row] <= wr.data;

  int checks = 0, failures = 0;
  int cyc = 0, first_req = -1, last_gnt = -1, n_ld_done = 0, n_st_done = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req && gnt) begin
      if (first_req < 0) first_req <= cyc;
      last_gnt <= cyc;
    end
    if (ld_done) n_ld_done <= n_ld_done + 1;
    if (st_done) n_st_done <= n_st_done + 1;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input bit st, input int r, input int base, input int stride, input int id);
    ins = '0; ins.valid = 1; ins.unit = UNIT_LSU; ins.op = st ? F3_MST : F3_MLD;
    ins.is_store = st; ins.md = reg_idx_t'(r); ins.rs1 = base; ins.rs2 = stride; ins.id = id_t'(id);
    @(negedge clk);
    iv = 1;
    while (!ir) @(negedge clk);
    @(posedge clk);
    #1 iv = 0;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (busy) @(posedge clk);
    @(posedge clk);
  endtask

  // word at byte address
  function automatic logic [31:0] mw(input int a);
    return mem.rd(a / 4);
  endfunction

  task automatic check_reg_vs_mem(input int r, input int base, input int stride);
    for (int i = 0; i < NROWS; i++)
      for (int e = 0; e < NROWS; e++) begin
        checks++;
        if (mrf[r][i][32*e +: 32] !== mw(base + i * stride + 4 * e)) begin
          failures++;
          if (failures < 10) $display("FAIL m%0d[%0d][%0d] %h vs mem %h", r, i, e, mrf[r][i][32*e +: 32], mw(base + i*stride + 4*e));
        end
      end
  endtask

  initial begin
    iv = 0; ins = '0;
    for (int r = 0; r < NREGS; r++) for (int i = 0; i < NROWS; i++) mrf[r][i] = '0;
    for (int w = 0; w < 4096; w++) mem.wr(w, $urandom);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      int base [4];
      int stride;
      stall_pct = (round < 2) ? 0 : 30;
      stride = 16 * (1 + $urandom % 8) + ((round % 2) ? 4 : 0);
      for (int m = 0; m < 4; m++) base[m] = 4 * ($urandom % 1024);
      first_req = -1;
      // four back-to-back loads, m0..m3
      for (int m = 0; m < 4; m++) issue(0, m, base[m], stride, m);
      wait_idle();
      for (int m = 0; m < 4; m++) check_reg_vs_mem(m, base[m], stride);
      if (stall_pct == 0) begin
        // 16 rows through a 128-bit port: 16 cycles plus at most 2 of refill
        checks++;
        if (last_gnt - first_req + 1 > 18) begin
          failures++; $display("FAIL four mld took %0d memory cycles", last_gnt - first_req + 1);
        end
      end
      // store m0..m3 to a fresh region, then reload into m4..m7
      for (int m = 0; m < 4; m++) issue(1, m, 20000 + 1024 * m, stride, 4 + m);
      wait_idle();
      for (int m = 0; m < 4; m++) check_reg_vs_mem(m, 20000 + 1024 * m, stride);
      // a load followed by a store of the same register: the store must see the load
      issue(0, 5, base[3], stride, 9);
      issue(1, 5, 40000, stride, 10);
      wait_idle();
      check_reg_vs_mem(5, 40000, stride);
      check_reg_vs_mem(5, base[3], stride);
    end
    checks++;
    if (n_ld_done != 6 * 5 || n_st_done != 6 * 5) begin
      failures++; $display("FAIL completions %0d %0d", n_ld_done, n_st_done);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no memory stalls exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
