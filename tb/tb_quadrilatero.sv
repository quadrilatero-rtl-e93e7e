// tb_quadrilatero: end-to-end test of the coprocessor at its only (default)
// configuration. Runs the tiled matmul kernel in all four data types, with and
// without memory stalls and result-channel back-pressure, offers an illegal
// instruction, and checks every result element. It then checks that each
// mechanism of the design happened: register-hazard stalls, busy-unit stalls,
// three mmacs overlapping in the systolic array, two loads or stores in the
// load-store unit at once, memory stalls, result back-pressure, rejection of
// a non-matrix instruction, and every instruction type.
module tb_quadrilatero;
  import tb_quad_isa_pkg::*;

  tb_quad_env env ();

  initial begin
    #20ms;
    env.failures++;
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end

  initial begin
    logic ok;
    env.reset_dut();
    // a non-matrix instruction (an OP-IMM addi) must be refused
    env.offload(32'h00100093, 0, 0, ok);
    env.checks++;
    if (ok) begin env.failures++; $display("FAIL illegal instruction accepted"); end

    for (int dt = 0; dt < 4; dt++) begin
      env.run_matmul(16, 16 * ((dt == 2) ? 2 : (dt == 3) ? 4 : 1), 16, dt, 1);
      $display("matmul 16x%0dx16 dt=%0d: %0d cycles, MAC utilisation %.1f%%",
               16 * ((dt == 2) ? 2 : (dt == 3) ? 4 : 1), dt, env.last_cycles,
               env.utilisation(16, 16 * ((dt == 2) ? 2 : (dt == 3) ? 4 : 1), 16, dt, env.last_cycles));
    end
    // again with memory stalls and result back-pressure
    env.stall_pct = 25;
    env.result_ready_pct = 40;
    env.run_matmul(8, 32, 16, 0, 1);
    env.run_matmul(16, 64, 8, 3, 1);
    env.stall_pct = 0;
    env.result_ready_pct = 100;

    $display("mechanisms: hazard stalls %0d, unit stalls %0d, SA 3-deep %0d, LSU 2 in flight %0d, mem stalls %0d, result back-pressure %0d, rejected %0d",
             env.c_haz, env.c_unit, env.c_sa_overlap3, env.c_lsu_two, env.mem_stalls,
             env.c_res_backpressure, env.n_rejected);
    if (env.c_haz == 0)              begin env.failures++; $display("FAIL no hazard stall"); end
    if (env.c_unit == 0)             begin env.failures++; $display("FAIL no busy-unit stall"); end
    if (env.c_sa_overlap3 == 0)      begin env.failures++; $display("FAIL SA never held three mmacs"); end
    if (env.c_lsu_two == 0)          begin env.failures++; $display("FAIL LSU never had two in flight"); end
    if (env.mem_stalls == 0)         begin env.failures++; $display("FAIL no memory stall"); end
    if (env.c_res_backpressure == 0) begin env.failures++; $display("FAIL no result back-pressure"); end
    if (env.n_rejected == 0)         begin env.failures++; $display("FAIL no rejected instruction"); end
    for (int d = 0; d < 4; d++)
      if (env.n_mmac[d] == 0)        begin env.failures++; $display("FAIL no mmac of type %0d", d); end
    if (env.n_mz == 0 || env.n_mld == 0 || env.n_mst == 0) begin env.failures++; $display("FAIL missing mz/mld/mst"); end
    env.checks += 14;
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end
endmodule
