// tb_rprr_workload -- read-port conflict rates of the connection schemes under
// the measured operand traffic.
//
// The paper's workload is the SPECrate CPU 2017 Integer suite on a full core,
// which cannot run on a register-read stage alone. What the stage sees of it is
// the probability that each operand needs a PRF read in a cycle; those
// utilizations were measured for the baseline core (ALU operands of ports 0-7:
// 13.4 14.8 9.9 11.9 13.4 14.8 9.9 11.9 %; memory operands 4s1 ... 8s2:
// 21.0 8.1 21.1 8.1 11.6 5.3 11.6 5.3 7.8 %). This testbench draws every
// request bit independently with those probabilities (independence is this
// testbench's simplification) and feeds the same vectors to four arbiters:
// the arbitrary one-connection scheme and the three efficient schemes with one,
// two and four connections per mask.
//
// For each scheme the exact conflict probability of every memory operand under
// independent requests is computed first by enumerating all 2^17 request
// vectors with a reference model of the priorities. The measured rate of each
// arbiter over CYCLES random cycles must agree with it to within 1 percentage
// point, and the mean conflict rate must fall from one to two to four
// connections, the trend of the paper's IPC results. The expected load of the
// masks given to the load base operands in the two-connection scheme (sum of
// the ALU utilizations of the mask's ports) must be the lowest, 24.7 %.
module tb_rprr_workload;
  import rprr_pkg::*;

  localparam int unsigned CYCLES = 200000;
  localparam int unsigned NSCH   = 4;
  localparam conn_matrix_t SCH [NSCH] = '{SCHEME_FIG5, SCHEME_FIG10, SCHEME_FIG11, SCHEME_FIG12};
  localparam string SCH_NAME [NSCH] = '{"arbitrary 1-conn", "efficient 1-conn",
                                        "efficient 2-conn", "efficient 4-conn"};
  // utilizations in units of 0.1 %
  localparam int unsigned ALU_U [NUM_ALU_OPS] = '{134, 148, 99, 119, 134, 148, 99, 119};
  localparam int unsigned MEM_U [NUM_MEM_OPS] = '{210, 81, 211, 81, 116, 53, 116, 53, 78};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0;
  int unsigned failures = 0;

  logic [NUM_ALU_OPS-1:0]   a;
  logic [NUM_MEM_OPS-1:0]   k;
  sel_matrix_t              sel   [NSCH];
  logic [NUM_MEM_OPS-1:0]   grant [NSCH];
  logic [NUM_MEM_UNITS-1:0] canc  [NSCH];

  for (genvar s = 0; s < NSCH; s++) begin : g_arb
    rprr_port_arbiter #(.CONN(SCH[s])) u_arb (
      .alu_req(a), .mem_req(k), .sel(sel[s]), .mem_grant(grant[s]), .unit_cancel(canc[s]));
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [8:0] ref_grant(input conn_matrix_t c, input logic [7:0] av,
                                           input logic [8:0] kv);
    logic [7:0] taken, avail, low;
    logic [8:0] g;
    taken = av;
    g     = '0;
    for (int r = 0; r < NUM_MEM_OPS; r++)
      if (kv[r]) begin
        avail = c[r] & ~taken;
        low   = avail & (~avail + 8'd1);
        g[r]  = (low != 0);
        taken |= low;
      end
    return g;
  endfunction

  real exp_conf [NSCH][NUM_MEM_OPS];   // P(no port | requested)
  real pa [NUM_ALU_OPS];
  real pk [NUM_MEM_OPS];

  int unsigned req_cnt  [NSCH][NUM_MEM_OPS];
  int unsigned conf_cnt [NSCH][NUM_MEM_OPS];
  int unsigned unit_cnc [NSCH];

  initial begin
    real mean_exp [NSCH];
    real mean_meas [NSCH];
    for (int i = 0; i < NUM_ALU_OPS; i++) pa[i] = ALU_U[i] / 1000.0;
    for (int r = 0; r < NUM_MEM_OPS; r++) pk[r] = MEM_U[r] / 1000.0;

    // ---- exact expectation by enumeration
    for (int s = 0; s < NSCH; s++)
      for (int r = 0; r < NUM_MEM_OPS; r++) exp_conf[s][r] = 0.0;
    for (int av = 0; av < 256; av++) begin
      real wa;
      wa = 1.0;
      for (int i = 0; i < NUM_ALU_OPS; i++) wa *= av[i] ? pa[i] : 1.0 - pa[i];
      for (int kv = 0; kv < 512; kv++) begin
        real w;
        w = wa;
        for (int r = 0; r < NUM_MEM_OPS; r++) w *= kv[r] ? pk[r] : 1.0 - pk[r];
        for (int s = 0; s < NSCH; s++) begin
          logic [8:0] g;
          g = ref_grant(SCH[s], 8'(av), 9'(kv));
          for (int r = 0; r < NUM_MEM_OPS; r++)
            if (kv[r] && !g[r]) exp_conf[s][r] += w;
        end
      end
    end
    for (int s = 0; s < NSCH; s++)
      for (int r = 0; r < NUM_MEM_OPS; r++) exp_conf[s][r] /= pk[r];

    // ---- random traffic through the arbiters
    for (int s = 0; s < NSCH; s++) begin
      unit_cnc[s] = 0;
      for (int r = 0; r < NUM_MEM_OPS; r++) begin req_cnt[s][r] = 0; conf_cnt[s][r] = 0; end
    end
    for (int c = 0; c < CYCLES; c++) begin
      for (int i = 0; i < NUM_ALU_OPS; i++) a[i] = ($urandom_range(0, 999) < ALU_U[i]);
      for (int r = 0; r < NUM_MEM_OPS; r++) k[r] = ($urandom_range(0, 999) < MEM_U[r]);
      #1;
      for (int s = 0; s < NSCH; s++) begin
        for (int r = 0; r < NUM_MEM_OPS; r++)
          if (k[r]) begin
            req_cnt[s][r]++;
            if (!grant[s][r]) conf_cnt[s][r]++;
          end
        unit_cnc[s] += $countones(canc[s]);
      end
      @(posedge clk);
    end

    // ---- compare
    for (int s = 0; s < NSCH; s++) begin
      real tot_req, tot_exp, tot_meas;
      tot_req = 0; tot_exp = 0; tot_meas = 0;
      $display("%s: conflict rate per operand, measured (exact), %%", SCH_NAME[s]);
      for (int r = 0; r < NUM_MEM_OPS; r++) begin
        real meas;
        meas = real'(conf_cnt[s][r]) / real'(req_cnt[s][r]);
        $display("  op %0d: %6.2f (%6.2f)", r, 100.0 * meas, 100.0 * exp_conf[s][r]);
        check(meas - exp_conf[s][r] < 0.01 && exp_conf[s][r] - meas < 0.01,
              $sformatf("%s op %0d rate %f exp %f", SCH_NAME[s], r, meas, exp_conf[s][r]));
        tot_req  += pk[r];
        tot_exp  += pk[r] * exp_conf[s][r];
        tot_meas += real'(conf_cnt[s][r]);
      end
      mean_exp[s]  = tot_exp / tot_req;
      mean_meas[s] = tot_meas / real'(CYCLES) / tot_req;
      $display("  mean over requests: %6.3f %% (exact %6.3f %%), unit cancels per cycle %6.4f",
               100.0 * mean_meas[s], 100.0 * mean_exp[s], real'(unit_cnc[s]) / real'(CYCLES));
    end
    check(mean_exp[1] > mean_exp[2] && mean_exp[2] > mean_exp[3],
          "conflicts fall from 1 to 2 to 4 connections");
    check(mean_meas[1] > mean_meas[2] && mean_meas[2] > mean_meas[3],
          "measured conflicts fall from 1 to 2 to 4 connections");
    check(mean_exp[0] > mean_exp[1], "efficient 1-conn scheme beats the arbitrary one");
    // Expected load of a mask = sum of the ALU utilizations of its ports: the two
    // least loaded 2-port masks (24.7 %) serve the load base operands 4s1, 5s1.
    begin
      int unsigned occ4, occ5;
      occ4 = 0; occ5 = 0;
      for (int p = 0; p < NUM_RD_PORTS; p++) begin
        if (SCHEME_FIG11[0][p]) occ4 += ALU_U[p];
        if (SCHEME_FIG11[2][p]) occ5 += ALU_U[p];
      end
      check(occ4 == 247 && occ5 == 247, "load base masks of the 2-conn scheme carry 24.7 %");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (CYCLES + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
