// tb_quad_mrf: random reads and writes on all ports of the matrix register
// file, checked against a shadow copy; writes in one cycle go to distinct rows.
module tb_quad_mrf;
  import quad_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mrf_raddr_t ra [4];
  row_t       rd [4];
  mrf_wr_t    wr [3];
  quad_mrf dut (.clk_i(clk), .rst_ni(rst_n), .rd_addr_i(ra), .rd_data_o(rd), .wr_i(wr));

  row_t shadow [NREGS][NROWS];
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic row_t rrow();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    for (int p = 0; p < 3; p++) wr[p] = '0;
    for (int p = 0; p < 4; p++) ra[p] = '0;
    for (int r = 0; r < NREGS; r++) for (int w = 0; w < NROWS; w++) shadow[r][w] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      // drive: three writes to distinct rows, four random reads
      for (int p = 0; p < 3; p++) begin
        wr[p].en   = ($urandom % 2) == 1;
        wr[p].rg   = reg_idx_t'(($urandom % 2) * 4 + p);   // distinct per port
        wr[p].row  = row_idx_t'($urandom);
        wr[p].data = rrow();
      end
      for (int p = 0; p < 4; p++) ra[p] = '{rg: reg_idx_t'($urandom), row: row_idx_t'($urandom)};
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rd[p] !== shadow[ra[p].rg][ra[p].row]) begin
          failures++;
          if (failures < 10) $display("FAIL read port %0d m%0d row %0d", p, ra[p].rg, ra[p].row);
        end
      end
      @(posedge clk);
      for (int p = 0; p < 3; p++) if (wr[p].en) shadow[wr[p].rg][wr[p].row] = wr[p].data;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
