// quadrilatero: top level of the matrix coprocessor.
//
// A RISC-V core offloads matrix instructions over the XIF issue channel. The
// controller decodes them and queues each, in program order, for one of three
// units, which start it once the scoreboard shows its register dependencies
// allow it:
//   - the permutation unit (mz),
//   - the load-store unit (mld.w, mst.w) with its own 128-bit memory port,
//   - the 4x4 systolic array (mmac in fp32, int32, int16x2, int8x4).
// All three work on the matrix register file: eight registers of 4 x 128 bits
// with four read and three write row ports, assigned as
//   read  0,1,2: systolic array (weights ms2, feed ms1, accumulator md)
//   read  3    : load-store unit (mst.w)
//   write 0    : systolic array;  write 1: load-store unit;  write 2: permutation unit.
// Completed instructions return their id on the XIF result channel.
// The block structure and port counts follow the paper's architecture figure;
// see the submodules for their timing and for what is this design's own.
//
// Memory port: req/we/addr/wdata held until gnt; read data returns with rvalid
// in request order, at least one cycle after the grant. The port is 128 bits
// wide and needs only 4-byte alignment (in the paper's system it feeds four
// word-interleaved 32-bit banks through an interconnect).
// Status outputs expose the dispatcher's stall reasons and unit activity for
// performance counting.
module quadrilatero
  import quad_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // XIF issue
  input  logic        x_issue_valid_i,
  output logic        x_issue_ready_o,
  input  logic [31:0] x_issue_instr_i,
  input  logic [31:0] x_issue_rs1_i,
  input  logic [31:0] x_issue_rs2_i,
  input  id_t         x_issue_id_i,
  output logic        x_issue_accept_o,
  // XIF result
  output logic        x_result_valid_o,
  input  logic        x_result_ready_i,
  output id_t         x_result_id_o,
  // memory port
  output logic        mem_req_o,
  output logic        mem_we_o,
  output logic [31:0] mem_addr_o,
  output row_t        mem_wdata_o,
  input  logic        mem_gnt_i,
  input  logic        mem_rvalid_i,
  input  row_t        mem_rdata_i,
  // status
  output logic        stall_hazard_o,
  output logic        stall_unit_o,
  output logic        sa_busy_o,
  output logic        lsu_busy_o,
  output logic        idle_o
);

  instr_t pu_ins, lsu_ins, sa_ins;
  tk_vec_t wstart, rstart_now;
  logic pu_v, pu_r, lsu_v, lsu_r, sa_v, sa_r;

  mrf_raddr_t rd_addr [4];
  row_t       rd_data [4];
  mrf_wr_t    wr      [3];

  // unit events
  logic     pu_start, pu_done;   reg_idx_t pu_reg;  id_t pu_id;
  logic     ld_start, ld_done;   reg_idx_t ld_reg;  id_t ld_id;
  logic     st_read;             reg_idx_t st_reg;
  logic     st_done;             id_t st_id;
  logic     wl_start;            reg_idx_t wl_reg;
  logic     fd_start;            reg_idx_t fd_ms1, fd_md;
  logic     wb_start, wb_done;   reg_idx_t wb_md;   id_t wb_id;

  logic     cmp_valid [4];
  id_t      cmp_id    [4];
  logic     rd_st_v   [4];
  reg_idx_t rd_st_r   [4];
  logic     wr_st_v   [3];
  reg_idx_t wr_st_r   [3];

  assign cmp_valid = '{pu_done, ld_done, st_done, wb_done};
  assign cmp_id    = '{pu_id,   ld_id,   st_id,   wb_id};
  assign rd_st_v   = '{wl_start, fd_start, fd_start, st_read};
  assign rd_st_r   = '{wl_reg,   fd_ms1,   fd_md,    st_reg};
  assign wr_st_v   = '{wb_start, ld_start, pu_start};
  assign wr_st_r   = '{wb_md,    ld_reg,   pu_reg};

  quad_controller u_ctrl (
    .clk_i, .rst_ni,
    .x_issue_valid_i, .x_issue_ready_o, .x_issue_instr_i, .x_issue_rs1_i, .x_issue_rs2_i,
    .x_issue_id_i, .x_issue_accept_o, .x_result_valid_o, .x_result_ready_i, .x_result_id_o,
    .pu_instr_o (pu_ins), .pu_valid_o (pu_v), .pu_ready_i (pu_r),
    .lsu_instr_o (lsu_ins), .lsu_valid_o (lsu_v), .lsu_ready_i (lsu_r),
    .sa_instr_o (sa_ins), .sa_valid_o (sa_v), .sa_ready_i (sa_r),
    .cmp_valid_i (cmp_valid), .cmp_id_i (cmp_id),
    .rd_start_valid_i (rd_st_v), .rd_start_reg_i (rd_st_r),
    .wr_start_valid_i (wr_st_v), .wr_start_reg_i (wr_st_r),
    .wstart_o (wstart), .rstart_o (), .rstart_now_o (rstart_now),
    .stall_hazard_o, .stall_unit_o, .idle_o
  );

  quad_mrf u_mrf (
    .clk_i, .rst_ni, .rd_addr_i (rd_addr), .rd_data_o (rd_data), .wr_i (wr)
  );

  quad_perm_unit u_pu (
    .clk_i, .rst_ni, .issue_valid_i (pu_v), .issue_ready_o (pu_r), .issue_i (pu_ins),
    .wr_o (wr[2]), .start_o (pu_start), .done_o (pu_done), .done_reg_o (pu_reg), .done_id_o (pu_id)
  );

  quad_lsu u_lsu (
    .clk_i, .rst_ni, .issue_valid_i (lsu_v), .issue_ready_o (lsu_r), .issue_i (lsu_ins),
    .rd_addr_o (rd_addr[3]), .rd_data_i (rd_data[3]), .wr_o (wr[1]),
    .mem_req_o, .mem_we_o, .mem_addr_o, .mem_wdata_o, .mem_gnt_i, .mem_rvalid_i, .mem_rdata_i,
    .wstart_i (wstart), .rstart_i (rstart_now), .ld_start_o (ld_start), .ld_done_o (ld_done), .ld_reg_o (ld_reg), .ld_id_o (ld_id),
    .st_read_o (st_read), .st_reg_o (st_reg), .st_done_o (st_done), .st_id_o (st_id),
    .busy_o (lsu_busy_o)
  );

  quad_systolic_array u_sa (
    .clk_i, .rst_ni, .issue_valid_i (sa_v), .issue_ready_o (sa_r), .issue_i (sa_ins),
    .rd_w_addr_o (rd_addr[0]), .rd_w_data_i (rd_data[0]),
    .rd_a_addr_o (rd_addr[1]), .rd_a_data_i (rd_data[1]),
    .rd_c_addr_o (rd_addr[2]), .rd_c_data_i (rd_data[2]),
    .wr_o (wr[0]),
    .ev_wl_start_o (wl_start), .ev_wl_reg_o (wl_reg),
    .ev_fd_start_o (fd_start), .ev_fd_ms1_o (fd_ms1), .ev_fd_md_o (fd_md),
    .ev_wb_start_o (wb_start), .ev_wb_done_o (wb_done), .ev_wb_md_o (wb_md), .ev_wb_id_o (wb_id),
    .busy_o (sa_busy_o)
  );

endmodule
