// quad_mrf: the matrix register file.
//
// Eight matrix registers of four 128-bit rows (4 Kibit in total), accessed one
// row at a time so that a whole register is read or written in four cycles.
// It has four read ports and three write ports, each one row wide, as in the
// paper: reads 0..2 belong to the systolic array (weights, feed data,
// accumulator), read 3 to the load-store unit; write 0 to the systolic array,
// write 1 to the load-store unit, write 2 to the permutation unit. That port
// assignment is read off the paper's block diagram.
//
// Reads are combinational (the row appears in the same cycle as its address);
// writes take effect at the clock edge. A write and a read of the same row in
// one cycle return the old value. The scoreboard keeps two units from writing
// the same row in one cycle; an assertion checks it, and if it happened the
// higher-numbered write port would win. Registers reset to zero (this
// design's choice; the paper does not say).
module quad_mrf
  import quad_pkg::*;
#(
  parameter int unsigned N_RD = 4,
  parameter int unsigned N_WR = 3
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  mrf_raddr_t rd_addr_i [N_RD],
  output row_t       rd_data_o [N_RD],
  input  mrf_wr_t    wr_i      [N_WR]
);

  row_t mem_q [NREGS][NROWS];

  for (genvar p = 0; p < N_RD; p++) begin : g_rd
    assign rd_data_o[p] = mem_q[rd_addr_i[p].rg][rd_addr_i[p].row];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 0; r < NREGS; r++)
        for (int w = 0; w < NROWS; w++) mem_q[r][w] <= '0;
    end else begin
      for (int p = 0; p < N_WR; p++)
        if (wr_i[p].en) mem_q[wr_i[p].rg][wr_i[p].row] <= wr_i[p].data;
      // no two ports write the same row in one cycle
      for (int p = 0; p < N_WR; p++)
        for (int q = p + 1; q < N_WR; q++)
          assert (!(wr_i[p].en && wr_i[q].en && wr_i[p].rg == wr_i[q].rg
                    && wr_i[p].row == wr_i[q].row))
            else $error("two writes to m%0d row %0d in one cycle", wr_i[p].rg, wr_i[p].row);
    end
  end

endmodule
