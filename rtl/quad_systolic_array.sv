// quad_systolic_array: the 4x4 weight-stationary systolic array that executes
// mmac md, ms1, ms2, i.e. md[i][j] += sum_k ms1[i][k] * ms2[j][k]
// (ms2 holds the right-hand matrix transposed, as in the paper's kernel).
//
// An mmac passes three stages of four cycles each, so one mmac takes 12 cycles
// and a new one can start every 4 cycles, keeping the 16 MAC units busy:
//   WL (weight load)  cycle r: row r of ms2 is read; its element k becomes the
//                     weight of PE(k, r). Element k reaches PE row k k cycles
//                     later, so the load runs as a diagonal wavefront behind
//                     the computation of the previous mmac. Weights are double
//                     buffered: an mmac loads into the bank its predecessor
//                     does not use.
//   FD (feed)         cycle i: row i of ms1 and row i of md are read. Element k
//                     of the ms1 row is broadcast to the four PEs of PE row k,
//                     skewed by k cycles; row i of md enters PE row 0 as the
//                     initial partial sum and the partial sums move down one PE
//                     row per cycle (acc = acc + a*w in each PE).
//   WB (write back)   cycle i: the finished row i leaves PE row 3 and is
//                     written to md.
// The three stages hold three different mmac instructions at once.
// Stage lengths, the 12-cycle latency, the 4-cycle issue interval, the 4x4
// size and the weight-stationary, double-buffered flow follow the paper. The
// broadcast of an ms1 element along a PE row, the diagonal weight load and the
// accumulation order (md + k=0 term + k=1 term ...) are this design's choices.
//
// Interface: a request is accepted on issue_valid_i && issue_ready_o; the
// array asks for nothing else and never stalls. Three MRF read ports (weights,
// feed data, accumulator) and one MRF write port are dedicated to the array.
// ev_* pulses tell the scoreboard when the array starts reading an operand
// (row 0 of ms2 in the first WL cycle, row 0 of ms1 and md in the first FD
// cycle), when it starts writing md (first WB cycle) and when md is complete
// (last WB cycle). Reads and writes never pause once started, one row per
// cycle, which is what lets the scoreboard overlap dependent instructions.
module quad_systolic_array
  import quad_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // issue
  input  logic        issue_valid_i,
  output logic        issue_ready_o,
  input  instr_t      issue_i,
  // MRF read ports: weights (ms2), feed (ms1), accumulator (md)
  output mrf_raddr_t  rd_w_addr_o,
  input  row_t        rd_w_data_i,
  output mrf_raddr_t  rd_a_addr_o,
  input  row_t        rd_a_data_i,
  output mrf_raddr_t  rd_c_addr_o,
  input  row_t        rd_c_data_i,
  // MRF write port
  output mrf_wr_t     wr_o,
  // scoreboard events
  output logic        ev_wl_start_o,  // row 0 of ms2 read this cycle
  output reg_idx_t    ev_wl_reg_o,
  output logic        ev_fd_start_o,  // row 0 of ms1 and md read this cycle
  output reg_idx_t    ev_fd_ms1_o,
  output reg_idx_t    ev_fd_md_o,
  output logic        ev_wb_start_o,  // row 0 of md written this cycle
  output logic        ev_wb_done_o,   // md fully written: instruction complete
  output reg_idx_t    ev_wb_md_o,
  output id_t         ev_wb_id_o,
  // activity, for performance counting
  output logic        busy_o
);

  localparam int N = NROWS;

  typedef struct packed {
    logic     v;
    reg_idx_t md;
    reg_idx_t ms1;
    reg_idx_t ms2;
    dtype_e   dtype;
    id_t      id;
    logic     bank;
  } stage_t;

  stage_t   wl_q, fd_q, wb_q;
  row_idx_t wl_cnt_q, fd_cnt_q, wb_cnt_q;
  logic     bank_q;                  // bank the next mmac loads into

  logic wl_last, fd_last, wb_last;
  assign wl_last = wl_q.v && (wl_cnt_q == row_idx_t'(N-1));
  assign fd_last = fd_q.v && (fd_cnt_q == row_idx_t'(N-1));
  assign wb_last = wb_q.v && (wb_cnt_q == row_idx_t'(N-1));

  assign issue_ready_o = !wl_q.v || wl_last;

  // ---------------- stage control ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wl_q <= '0; fd_q <= '0; wb_q <= '0;
      wl_cnt_q <= '0; fd_cnt_q <= '0; wb_cnt_q <= '0;
      bank_q <= 1'b0;
    end else begin
      wl_cnt_q <= wl_q.v ? wl_cnt_q + 1'b1 : '0;
      fd_cnt_q <= fd_q.v ? fd_cnt_q + 1'b1 : '0;
      wb_cnt_q <= wb_q.v ? wb_cnt_q + 1'b1 : '0;
      if (wb_last)  wb_q <= '0;
      if (fd_last)  begin wb_q <= fd_q; fd_q <= '0; end
      if (wl_last)  begin fd_q <= wl_q; wl_q <= '0; end
      if (issue_valid_i && issue_ready_o) begin
        wl_q <= '{v: 1'b1, md: issue_i.md, ms1: issue_i.ms1, ms2: issue_i.ms2,
                  dtype: issue_i.dtype, id: issue_i.id, bank: bank_q};
        bank_q <= ~bank_q;
      end
    end
  end

  // ---------------- MRF reads ----------------
  assign rd_w_addr_o = '{rg: wl_q.ms2, row: wl_cnt_q};
  assign rd_a_addr_o = '{rg: fd_q.ms1, row: fd_cnt_q};
  assign rd_c_addr_o = '{rg: fd_q.md,  row: fd_cnt_q};

  // ---------------- weight load wavefront ----------------
  typedef struct packed {
    logic     v;
    logic     bank;
    row_idx_t col;
  } wtag_t;

  wtag_t       wtag [N];            // wtag[s]: WL tag delayed by s cycles
  logic [31:0] wdat [N][N];         // wdat[k][s]: element k delayed by s cycles
  logic [31:0] wgt  [2][N][N];      // wgt[bank][k][j]

  assign wtag[0] = '{v: wl_q.v, bank: wl_q.bank, col: wl_cnt_q};
  for (genvar k = 0; k < N; k++) begin : g_wdat0
    assign wdat[k][0] = rd_w_data_i[ELEN*k +: ELEN];
  end

  for (genvar s = 1; s < N; s++) begin : g_wskew
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) wtag[s] <= '0;
      else         wtag[s] <= wtag[s-1];
    end
    for (genvar k = s; k < N; k++) begin : g_k
      always_ff @(posedge clk_i) wdat[k][s] <= wdat[k][s-1];
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_wload
    // no reset: a weight buffer is always filled completely before it is used
    always_ff @(posedge clk_i)
      if (wtag[k].v) wgt[wtag[k].bank][k][wtag[k].col] <= wdat[k][k];
  end

  // ---------------- feed wavefront and PE grid ----------------
  typedef struct packed {
    logic   v;
    logic   bank;
    dtype_e dtype;
  } ftag_t;

  ftag_t       ftag [N];            // ftag[s]: FD tag delayed by s cycles
  logic [31:0] adat [N][N];         // adat[k][s]: ms1 element k delayed by s
  logic [31:0] ps   [N][N];         // ps[k][j]: partial sum leaving PE(k,j)
  logic [31:0] pe_out [N][N];

  assign ftag[0] = '{v: fd_q.v, bank: fd_q.bank, dtype: fd_q.dtype};
  for (genvar k = 0; k < N; k++) begin : g_adat0
    assign adat[k][0] = rd_a_data_i[ELEN*k +: ELEN];
  end
  for (genvar s = 1; s < N; s++) begin : g_fskew
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) ftag[s] <= '0;
      else         ftag[s] <= ftag[s-1];
    end
    for (genvar k = s; k < N; k++) begin : g_k
      always_ff @(posedge clk_i) adat[k][s] <= adat[k][s-1];
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      logic [31:0] acc_in;
      if (k == 0) begin : g_top
        assign acc_in = rd_c_data_i[ELEN*j +: ELEN];
      end else begin : g_chain
        assign acc_in = ps[k-1][j];
      end
      quad_mac_unit u_mac (
        .dtype_i (ftag[k].dtype),
        .a_i     (adat[k][k]),
        .w_i     (wgt[ftag[k].bank][k][j]),
        .acc_i   (acc_in),
        .acc_o   (pe_out[k][j])
      );
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni)          ps[k][j] <= '0;
        else if (ftag[k].v)   ps[k][j] <= pe_out[k][j];
      end
    end
  end

  // ---------------- write back ----------------
  row_t wb_row;
  always_comb
    for (int j = 0; j < N; j++) wb_row[ELEN*j +: ELEN] = ps[N-1][j];

  assign wr_o = '{en: wb_q.v, rg: wb_q.md, row: wb_cnt_q, data: wb_row};

  // ---------------- scoreboard events ----------------
  assign ev_wl_start_o = wl_q.v && (wl_cnt_q == '0);
  assign ev_wl_reg_o  = wl_q.ms2;
  assign ev_fd_start_o = fd_q.v && (fd_cnt_q == '0);
  assign ev_wb_start_o = wb_q.v && (wb_cnt_q == '0);
  assign ev_fd_ms1_o  = fd_q.ms1;
  assign ev_fd_md_o   = fd_q.md;
  assign ev_wb_done_o = wb_last;
  assign ev_wb_md_o   = wb_q.md;
  assign ev_wb_id_o   = wb_q.id;
  assign busy_o       = wl_q.v || fd_q.v || wb_q.v;

  // An mmac that finishes feeding starts its write-back in the next cycle.
  logic fd_last_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) fd_last_q <= 1'b0;
    else begin
      fd_last_q <= fd_last;
      if (fd_last_q) assert (wb_q.v && wb_cnt_q == '0) else $error("write-back did not follow the feed");
    end
  end

endmodule
