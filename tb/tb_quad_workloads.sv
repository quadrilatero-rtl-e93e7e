// tb_quad_workloads: the twelve matrix-multiplication workloads used to
// evaluate the design (three shapes M x K x N, four data types), run at full
// size through the coprocessor with the tiled kernel. Results are checked on
// a sample of rows of C; the cycle count of each run is printed next to the
// reference count and checked against it within a tolerance.
module tb_quad_workloads;
  tb_quad_env env ();

  typedef struct { int m; int k; int n; int dt; int ref_cycles; } wl_t;
  wl_t wl [12];
  // Allowed ratio of measured to reference cycles. This design reaches
  // 1.07x to 1.25x the reference counts: a load's register write must wait
  // for the readers of the old contents of that register (WAR), and with two
  // load buffers the memory port then idles for a cycle or two per k step;
  // short-K workloads also pay more for the accumulator stores.
  localparam real TOL = 1.30;

  initial begin
    #200ms;
    env.failures++;
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end

  initial begin
    wl = '{'{64, 64, 64, 0, 17676}, '{64, 64, 64, 1, 17676}, '{64, 64, 64, 2, 9484}, '{64, 64, 64, 3, 5388},
           '{8, 1024, 8, 0, 4120},  '{8, 1024, 8, 1, 4120},  '{8, 1024, 8, 2, 2072},  '{8, 1024, 8, 3, 1048},
           '{64, 16, 64, 0, 5398},  '{64, 16, 64, 1, 5398},  '{64, 16, 64, 2, 3340},  '{64, 16, 64, 3, 2316}};
    env.reset_dut();
    foreach (wl[i]) begin
      env.run_matmul(wl[i].m, wl[i].k, wl[i].n, wl[i].dt, 0);
      $display("workload %0dx%0dx%0d dt=%0d: %0d cycles (reference %0d, ratio %.3f), MAC utilisation %.1f%%",
               wl[i].m, wl[i].k, wl[i].n, wl[i].dt, env.last_cycles, wl[i].ref_cycles,
               real'(env.last_cycles) / real'(wl[i].ref_cycles),
               env.utilisation(wl[i].m, wl[i].k, wl[i].n, wl[i].dt, env.last_cycles));
      env.checks++;
      if (real'(env.last_cycles) > TOL * real'(wl[i].ref_cycles)) begin
        env.failures++;
        $display("FAIL workload %0d slower than reference by more than %.0f%%", i, 100.0 * (TOL - 1.0));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end
endmodule
