// tb_quad_env: test environment around the coprocessor top. It contains the
// coprocessor, the four-bank data memory model and a behavioural stand-in for
// the host core that sends instructions over the XIF issue channel and
// collects results, with a random ready on the result channel. The task
// run_matmul executes the tiled matrix multiplication kernel of the design
// (8x8 output blocks, four accumulators m4..m7, operands in m0..m3, B stored
// transposed) on random data and checks C against a reference computed here.
// It also counts how often each mechanism of the design was exercised.
module tb_quad_env;
  import quad_pkg::*;
  import tb_fp_pkg::*;
  import tb_quad_isa_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        iv, ir, acc;
  logic [31:0] instr, rs1, rs2;
  id_t         iid;
  logic        rv, rr;
  id_t         rid;
  logic        req, we, gnt, rvalid;
  logic [31:0] addr;
  row_t        wdata, rdata;
  logic        st_haz, st_unit, sa_busy, lsu_busy, idle;
  int          stall_pct = 0;
  int          mem_stalls;
  int          result_ready_pct = 100;

  quadrilatero dut (
    .clk_i (clk), .rst_ni (rst_n),
    .x_issue_valid_i (iv), .x_issue_ready_o (ir), .x_issue_instr_i (instr),
    .x_issue_rs1_i (rs1), .x_issue_rs2_i (rs2), .x_issue_id_i (iid), .x_issue_accept_o (acc),
    .x_result_valid_o (rv), .x_result_ready_i (rr), .x_result_id_o (rid),
    .mem_req_o (req), .mem_we_o (we), .mem_addr_o (addr), .mem_wdata_o (wdata),
    .mem_gnt_i (gnt), .mem_rvalid_i (rvalid), .mem_rdata_i (rdata),
    .stall_hazard_o (st_haz), .stall_unit_o (st_unit), .sa_busy_o (sa_busy),
    .lsu_busy_o (lsu_busy), .idle_o (idle)
  );

  tb_mem_model mem (.clk_i (clk), .stall_pct_i (stall_pct), .req_i (req), .we_i (we),
    .addr_i (addr), .wdata_i (wdata), .gnt_o (gnt), .rvalid_o (rvalid), .rdata_o (rdata),
    .stalls_o (mem_stalls));

  int checks = 0, failures = 0;

  // ---------------- counters ----------------
  int cyc = 0;
  int n_issued = 0, n_results = 0, n_rejected = 0;
  int c_haz = 0, c_unit = 0, c_sa_overlap3 = 0, c_sa_overlap2 = 0, c_lsu_two = 0;
  int c_res_backpressure = 0, c_mem_busy = 0, c_mac_active = 0;
  int n_mmac [4] = '{0, 0, 0, 0};
  int n_mz = 0, n_mld = 0, n_mst = 0;

  always @(negedge clk) rr = ($urandom % 100) < result_ready_pct;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (rv && rr) n_results <= n_results + 1;
      if (rv && !rr) c_res_backpressure <= c_res_backpressure + 1;
      if (st_haz) c_haz <= c_haz + 1;
      if (st_unit) c_unit <= c_unit + 1;
      if (dut.u_sa.wl_q.v && dut.u_sa.fd_q.v && dut.u_sa.wb_q.v) c_sa_overlap3 <= c_sa_overlap3 + 1;
      if (dut.u_sa.wl_q.v && dut.u_sa.fd_q.v) c_sa_overlap2 <= c_sa_overlap2 + 1;
      if (dut.u_lsu.b_q[0].st != 0 && dut.u_lsu.b_q[1].st != 0) c_lsu_two <= c_lsu_two + 1;
      if (req && gnt) c_mem_busy <= c_mem_busy + 1;
      if (dut.u_sa.fd_q.v) c_mac_active <= c_mac_active + 1;   // 4 cycles x 16 MACs per mmac
    end
  end

  // ---------------- core stand-in ----------------
  id_t next_id = '0;

  task automatic offload(input logic [31:0] ins, input logic [31:0] a, input logic [31:0] b,
                         output logic accepted);
    @(negedge clk);
    instr = ins; rs1 = a; rs2 = b; iid = next_id; iv = 1;
    #1;
    while (!ir) @(negedge clk);
    accepted = acc;
    @(posedge clk);
    #1 iv = 0;
    if (accepted) begin
      n_issued++;
      next_id = next_id + 1'b1;
    end else n_rejected++;
  endtask

  task automatic send(input logic [31:0] ins, input logic [31:0] a = 0, input logic [31:0] b = 0);
    logic ok;
    offload(ins, a, b, ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL instruction %h not accepted", ins); end
    case (ins[14:12])
      3'd0: n_mz++;
      3'd1: n_mld++;
      3'd2: n_mst++;
      default: n_mmac[ins[26:25]]++;
    endcase
  endtask

  task automatic drain();
    while (n_results != n_issued || !idle) @(posedge clk);
  endtask

  task automatic reset_dut();
    iv = 0; instr = '0; rs1 = '0; rs2 = '0; iid = '0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
  endtask

  // ---------------- matmul kernel ----------------
  // Elements per 32-bit word: fp32/int32 1, int16 2, int8 4. K is in elements.
  // A: M x Kw words row-major at A_BASE; Bt: N x Kw words row-major at B_BASE;
  // C: M x N words row-major at C_BASE.
  localparam int A_BASE = 32'h0000_0000;
  int B_BASE, C_BASE;
  int last_cycles;

  function automatic logic [31:0] rand_word(input int dt);
    return (dt == 0) ? rand_f32() : $urandom;
  endfunction

  task automatic run_matmul(input int M, input int K, input int N, input int dt, input bit check_all);
    int epw, Kw, t0;
    int strideA, strideB, strideC;
    epw = (dt == 2) ? 2 : (dt == 3) ? 4 : 1;
    Kw = K / epw;
    strideA = Kw * 4; strideB = Kw * 4; strideC = N * 4;
    B_BASE = A_BASE + M * Kw * 4;
    C_BASE = B_BASE + N * Kw * 4;
    for (int i = 0; i < M * Kw; i++) mem.wr(A_BASE / 4 + i, rand_word(dt));
    for (int i = 0; i < N * Kw; i++) mem.wr(B_BASE / 4 + i, rand_word(dt));
    for (int i = 0; i < M * N; i++)  mem.wr(C_BASE / 4 + i, 32'hdeadbeef);
    @(posedge clk);
    t0 = cyc;
    for (int m = 0; m < M; m += 8)
      for (int n = 0; n < N; n += 8) begin
        send(enc_mz(4)); send(enc_mz(6)); send(enc_mz(5)); send(enc_mz(7));
        for (int k = 0; k < Kw; k += 4) begin
          send(enc_mld(0), A_BASE + (m * Kw + k) * 4, strideA);
          send(enc_mld(1), B_BASE + (n * Kw + k) * 4, strideB);
          send(enc_mmac(4, 0, 1, dt));
          send(enc_mld(2), A_BASE + ((m + 4) * Kw + k) * 4, strideA);
          send(enc_mmac(6, 2, 1, dt));
          send(enc_mld(3), B_BASE + ((n + 4) * Kw + k) * 4, strideB);
          send(enc_mmac(5, 0, 3, dt));
          send(enc_mmac(7, 2, 3, dt));
        end
        send(enc_mst(4), C_BASE + (m * N + n) * 4, strideC);
        send(enc_mst(5), C_BASE + (m * N + n + 4) * 4, strideC);
        send(enc_mst(6), C_BASE + ((m + 4) * N + n) * 4, strideC);
        send(enc_mst(7), C_BASE + ((m + 4) * N + n + 4) * 4, strideC);
      end
    drain();
    last_cycles = cyc - t0;
    // reference, checked on all elements or on a sample of rows
    for (int i = 0; i < M; i++) begin
      if (!check_all && (i % 7) != 3) continue;
      for (int j = 0; j < N; j++) begin
        logic [31:0] accv;
        accv = '0;
        for (int k = 0; k < Kw; k++)
          accv = mac_ref(dt, mem.rd(A_BASE / 4 + i * Kw + k), mem.rd(B_BASE / 4 + j * Kw + k), accv);
        checks++;
        if (mem.rd(C_BASE / 4 + i * N + j) !== accv) begin
          failures++;
          if (failures < 10)
            $display("FAIL C[%0d][%0d] dt=%0d got %h exp %h", i, j, dt, mem.rd(C_BASE / 4 + i * N + j), accv);
        end
      end
    end
  endtask

  // 16 MACs per cycle at best; ideal cycles of an M x K x N matmul
  function automatic real utilisation(input int M, input int K, input int N, input int dt, input int cycles);
    int epw;
    epw = (dt == 2) ? 2 : (dt == 3) ? 4 : 1;
    return 100.0 * (real'(M) * real'(K / epw) * real'(N) / 16.0) / real'(cycles);
  endfunction
endmodule
