// tb_quad_isa_pkg: encoders for the matrix instructions, written from the
// encoding table in quad_pkg's header (custom-0 opcode 0001011).
package tb_quad_isa_pkg;
  function automatic logic [31:0] enc_mz(input int md);
    return {5'd0, 2'd0, 5'd0, 5'd0, 3'd0, 2'd0, 3'(md), 7'b0001011};
  endfunction
  function automatic logic [31:0] enc_mld(input int md);
    return {5'd0, 2'd0, 5'd0, 5'd0, 3'd1, 2'd0, 3'(md), 7'b0001011};
  endfunction
  function automatic logic [31:0] enc_mst(input int ms);
    return {5'd0, 2'd0, 5'd0, 5'd0, 3'd2, 2'd0, 3'(ms), 7'b0001011};
  endfunction
  // dt: 0 fp32, 1 int32, 2 int16, 3 int8
  function automatic logic [31:0] enc_mmac(input int md, ms1, ms2, dt);
    return {5'd0, 2'(dt), 2'd0, 3'(ms2), 2'd0, 3'(ms1), 3'd3, 2'd0, 3'(md), 7'b0001011};
  endfunction
endpackage
