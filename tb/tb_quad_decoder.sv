// tb_quad_decoder: self-checking test of the instruction decoder.
//
// Drives the four matrix instructions for every register combination and data
// type, built with the encoders of tb_quad_isa_pkg, and checks each decoded
// field, the chosen unit and the passed-through operands. Then drives random
// 32-bit words and checks that only words with the matrix opcode, a funct3 of
// 0..3 and zero in bits 31:27 decode as valid. The decoder is combinational,
// so every check is made 1 ns after the inputs change.
module tb_quad_decoder;
  import quad_pkg::*;
  import tb_quad_isa_pkg::*;

  logic [31:0] instr, rs1, rs2;
  id_t         id;
  instr_t      dec;
  int checks = 0, failures = 0;

  quad_decoder dut (.instr_i(instr), .rs1_i(rs1), .rs2_i(rs2), .id_i(id), .dec_o(dec));

  initial begin
    #1ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_instr(input int op, md, ms1, ms2, dt);
    unit_e u;
    u = (op == 0) ? UNIT_PU : (op == 3) ? UNIT_SA : UNIT_LSU;
    checks++;
    if (!dec.valid || dec.op != funct3_e'(op) || dec.md != reg_idx_t'(md) || dec.unit != u
        || dec.is_store != (op == 2) || dec.rs1 != rs1 || dec.rs2 != rs2 || dec.id != id
        || (op == 3 && (dec.ms1 != reg_idx_t'(ms1) || dec.ms2 != reg_idx_t'(ms2)
                        || dec.dtype != dtype_e'(dt)))) begin
      failures++;
      $display("FAIL decode op %0d md %0d ms1 %0d ms2 %0d dt %0d: %p", op, md, ms1, ms2, dt, dec);
    end
  endtask

  initial begin
    for (int md = 0; md < NREGS; md++) begin
      rs1 = $urandom; rs2 = $urandom; id = id_t'($urandom);
      instr = enc_mz(md);  #1 expect_instr(0, md, 0, 0, 0);
      instr = enc_mld(md); #1 expect_instr(1, md, 0, 0, 0);
      instr = enc_mst(md); #1 expect_instr(2, md, 0, 0, 0);
      for (int a = 0; a < NREGS; a++)
        for (int b = 0; b < NREGS; b++)
          for (int dt = 0; dt < 4; dt++) begin
            instr = enc_mmac(md, a, b, dt); #1 expect_instr(3, md, a, b, dt);
          end
    end
    // random words: valid exactly when the encoding is legal
    for (int n = 0; n < 20000; n++) begin
      logic legal;
      instr = $urandom;
      if (n % 4 == 0) instr[6:0] = 7'b0001011;
      if (n % 8 == 0) instr[31:27] = 5'd0;
      #1;
      legal = (instr[6:0] == 7'b0001011) && (instr[31:27] == 5'd0) && (instr[14:12] <= 3'd3);
      checks++;
      if (dec.valid !== legal) begin
        failures++;
        $display("FAIL word %h decoded valid=%b", instr, dec.valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
