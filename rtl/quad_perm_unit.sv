// quad_perm_unit: the permutation unit, which executes mz md.
//
// mz clears a matrix register. The unit owns one MRF write port and writes a
// zero row per cycle, rows 0..3, so an mz takes four cycles, matching the
// four-cycle slots of the paper's schedule. A new mz is accepted in the cycle
// the previous one writes its last row, so mz instructions stream back to
// back. The paper states what the unit executes; the row-per-cycle sequence
// and the handshake are this design's choices.
//
// Interface: issue_valid_i/issue_ready_o handshake with the decoded
// instruction; start_o pulses when row 0 is written and done_o in the cycle
// the last row is written, with the register and instruction id, for the
// scoreboard and the completion report.
module quad_perm_unit
  import quad_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     issue_valid_i,
  output logic     issue_ready_o,
  input  instr_t   issue_i,
  output mrf_wr_t  wr_o,
  output logic     start_o,    // row 0 written this cycle
  output logic     done_o,
  output reg_idx_t done_reg_o,
  output id_t      done_id_o
);

  logic     busy_q;
  reg_idx_t md_q;
  id_t      id_q;
  row_idx_t row_q;
  logic     last;

  assign last          = busy_q && (row_q == row_idx_t'(NROWS - 1));
  assign issue_ready_o = !busy_q || last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; md_q <= '0; id_q <= '0; row_q <= '0;
    end else begin
      if (busy_q) row_q <= row_q + 1'b1;
      if (last) busy_q <= 1'b0;
      if (issue_valid_i && issue_ready_o) begin
        busy_q <= 1'b1;
        md_q   <= issue_i.md;
        id_q   <= issue_i.id;
        row_q  <= '0;
      end
    end
  end

  assign wr_o       = '{en: busy_q, rg: md_q, row: row_q, data: '0};
  assign start_o    = busy_q && (row_q == '0);
  assign done_o     = last;
  assign done_reg_o = md_q;
  assign done_id_o  = id_q;

endmodule
