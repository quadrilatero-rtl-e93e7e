// tb_quad_mac_unit: self-checking test of one MAC processing element.
// Drives directed and random operands in every data type and compares the
// result with tb_fp_pkg's reference arithmetic.
module tb_quad_mac_unit;
  import quad_pkg::*;
  import tb_fp_pkg::*;

  dtype_e      dt;
  logic [31:0] a, w, c, y;
  int checks = 0, failures = 0;

  quad_mac_unit dut (.dtype_i(dt), .a_i(a), .w_i(w), .acc_i(c), .acc_o(y));

  task automatic check(input int d, input logic [31:0] aa, ww, cc);
    logic [31:0] exp;
    dt = dtype_e'(d); a = aa; w = ww; c = cc;
    #1;
    exp = mac_ref(d, aa, ww, cc);
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL dt=%0d a=%h w=%h c=%h got %h exp %h", d, aa, ww, cc, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed fp32: 1.5*2 + 1 = 4 ; 1*1 - 1 = 0 ; 0*x + c = c
    check(0, 32'h3fc00000, 32'h40000000, 32'h3f800000);
    if (y !== 32'h40800000) begin failures++; $display("FAIL directed 4.0"); end
    check(0, 32'h3f800000, 32'h3f800000, 32'hbf800000);
    check(0, 32'h00000000, 32'h40000000, 32'h3f800000);
    check(1, 32'd7, -32'sd3, 32'd100);
    check(2, {16'sd3, -16'sd2}, {16'sd5, 16'sd4}, 32'd1);
    check(3, {8'sd1, -8'sd2, 8'sd3, -8'sd128}, {8'sd4, 8'sd5, -8'sd6, -8'sd128}, -32'sd7);
    for (int i = 0; i < 20000; i++) begin
      int d;
      d = i % 4;
      if (d == 0) begin
        logic [31:0] aa, ww, cc;
        aa = rand_f32(); ww = rand_f32(); cc = rand_f32();
        if (i % 7 == 0) cc = {~(aa[31]^ww[31]), cc[30:0]};  // favour cancellation
        check(0, aa, ww, cc);
      end else
        check(d, $urandom, $urandom, $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
