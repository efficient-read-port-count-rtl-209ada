// tb_rprr_port_arbiter -- self-checking test of the read-port arbiter.
//
// Three arbiters are checked side by side, one per efficient scheme (one, two
// and four connections per mask). Checks:
//   * directed cases of the worked example for the Fig. 1 scheme (a fourth
//     instance): the base operand of unit 4 and the index operand of unit 6
//     sharing read ports 1 and 4;
//   * random vectors a and k compared with a reference model that picks, for
//     each memory operand in priority order, the lowest set bit of
//     (connections & ~ports already taken) by two's-complement isolation;
//   * structural rules: ALU operand i on port i, every grant on a connected
//     port, at most one operand per port;
//   * the scheme classification functions on the printed matrices (number of
//     masks, symmetric, uniform symmetric).
// The arbiter is combinational; a clock only paces the test and the watchdog.
module tb_rprr_port_arbiter;
  import rprr_pkg::*;

  localparam int unsigned NSCH = 4;
  localparam conn_matrix_t SCH [NSCH] = '{SCHEME_FIG10, SCHEME_FIG11, SCHEME_FIG12, SCHEME_FIG1};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0;
  int unsigned failures = 0;

  logic [NUM_ALU_OPS-1:0]   a;
  logic [NUM_MEM_OPS-1:0]   k;
  sel_matrix_t              sel   [NSCH];
  logic [NUM_MEM_OPS-1:0]   grant [NSCH];
  logic [NUM_MEM_UNITS-1:0] canc  [NSCH];

  rprr_port_arbiter #(.CONN(SCHEME_FIG10)) u0 (.alu_req(a), .mem_req(k), .sel(sel[0]), .mem_grant(grant[0]), .unit_cancel(canc[0]));
  rprr_port_arbiter #(.CONN(SCHEME_FIG11)) u1 (.alu_req(a), .mem_req(k), .sel(sel[1]), .mem_grant(grant[1]), .unit_cancel(canc[1]));
  rprr_port_arbiter #(.CONN(SCHEME_FIG12)) u2 (.alu_req(a), .mem_req(k), .sel(sel[2]), .mem_grant(grant[2]), .unit_cancel(canc[2]));
  rprr_port_arbiter #(.CONN(SCHEME_FIG1))  u3 (.alu_req(a), .mem_req(k), .sel(sel[3]), .mem_grant(grant[3]), .unit_cancel(canc[3]));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (a=%b k=%b)", what, a, k);
    end
  endtask

  // Reference: port index granted to each memory operand, -1 if none.
  function automatic void ref_model(input conn_matrix_t c, input logic [7:0] av,
                                    input logic [8:0] kv, output int port_of [NUM_MEM_OPS],
                                    output logic [4:0] cancel);
    logic [7:0] taken, avail, low;
    taken  = av;
    cancel = '0;
    for (int r = 0; r < NUM_MEM_OPS; r++) begin
      port_of[r] = -1;
      if (kv[r]) begin
        avail = c[r] & ~taken;
        low   = avail & (~avail + 8'd1);
        if (low != 0) begin
          port_of[r] = $clog2(low);
          taken |= low;
        end else cancel[r/2] = 1'b1;
      end
    end
  endfunction

  task automatic check_all(input string tag);
    int         port_of [NUM_MEM_OPS];
    logic [4:0] cref;
    for (int s = 0; s < NSCH; s++) begin
      ref_model(SCH[s], a, k, port_of, cref);
      check(canc[s] == cref, $sformatf("%s scheme %0d cancel %b exp %b", tag, s, canc[s], cref));
      for (int r = 0; r < NUM_MEM_OPS; r++) begin
        check(grant[s][r] == (port_of[r] >= 0), $sformatf("%s scheme %0d grant op %0d", tag, s, r));
        for (int p = 0; p < NUM_RD_PORTS; p++)
          check(sel[s][p][NUM_ALU_OPS + r] == (port_of[r] == p),
                $sformatf("%s scheme %0d S[%0d][%0d]", tag, s, p, NUM_ALU_OPS + r));
      end
      for (int p = 0; p < NUM_RD_PORTS; p++) begin
        check(sel[s][p][NUM_ALU_OPS-1:0] == (a[p] ? (8'd1 << p) : 8'd0),
              $sformatf("%s scheme %0d ALU column of port %0d", tag, s, p));
        check($countones(sel[s][p]) <= 1, $sformatf("%s scheme %0d port %0d one-hot", tag, s, p));
      end
    end
  endtask

  // Operand indices used in the worked example.
  localparam int OP4S1 = NUM_ALU_OPS + 0;
  localparam int OP6S2 = NUM_ALU_OPS + 5;

  initial begin
    // ---- scheme classification of the printed matrices
    check(num_masks(SCHEME_FIG2) == 7, "Fig. 2 has 7 masks");
    check(num_masks(SCHEME_FIG3) == 9, "Fig. 3 has 9 masks");
    check(is_symmetric(SCHEME_FIG2), "Fig. 2 symmetric");
    check(!is_uniform_symmetric(SCHEME_FIG2), "Fig. 2 not uniform");
    check(!is_symmetric(SCHEME_FIG3), "Fig. 3 masks intersect");
    check(is_uniform_symmetric(SCHEME_FIG5),  "Fig. 5 uniform symmetric");
    check(is_uniform_symmetric(SCHEME_FIG6),  "Fig. 6 uniform symmetric");
    check(is_uniform_symmetric(SCHEME_FIG7),  "Fig. 7 uniform symmetric");
    check(is_uniform_symmetric(SCHEME_FIG10), "Fig. 10 uniform symmetric");
    check(is_uniform_symmetric(SCHEME_FIG11), "Fig. 11 uniform symmetric");
    check(is_uniform_symmetric(SCHEME_FIG12), "Fig. 12 uniform symmetric");
    check($countones(SCHEME_FIG10[0]) == 1 && $countones(SCHEME_FIG11[0]) == 2 &&
          $countones(SCHEME_FIG12[0]) == 4, "connections per mask 1/2/4");
    check(num_masks(SCHEME_FIG11) == 4, "Fig. 11 has 4 masks");
    // Fig. 11 masks as listed in the text: (0,3) (4,7) (1,2) (5,6)
    check(SCHEME_FIG11[0] == 8'b0000_0110 && SCHEME_FIG11[2] == 8'b0110_0000 &&
          SCHEME_FIG11[1] == 8'b1001_0000 && SCHEME_FIG11[3] == 8'b0000_1001, "Fig. 11 masks");

    // ---- worked example (scheme of Fig. 1, instance 3)
    // 4s1 alone, ports free: port 1.
    a = '0; k = 9'b0_0000_0001; #1;
    check(sel[3][1][OP4S1] && grant[3][0], "4s1 reads port 1 when it is free");
    // ALU operand on port 1 busy: 4s1 falls back to port 4.
    a = 8'b0000_0010; #1;
    check(sel[3][4][OP4S1] && sel[3][1][1], "4s1 reads port 4 when port 1 is the ALU's");
    // 6s2 alone: port 1.
    a = '0; k = 9'b0_0010_0000; #1;
    check(sel[3][1][OP6S2], "6s2 reads port 1 when free and 4s1 idle");
    // port 1 free and 4s1 requested: 6s2 on port 4.
    k = 9'b0_0010_0001; #1;
    check(sel[3][1][OP4S1] && sel[3][4][OP6S2] && canc[3] == '0, "6s2 on port 4 behind 4s1");
    // port 1 taken by ALU and 4s1 idle: 6s2 on port 4.
    a = 8'b0000_0010; k = 9'b0_0010_0000; #1;
    check(sel[3][4][OP6S2], "6s2 on port 4 when port 1 is the ALU's");
    // port 1 taken by ALU and 4s1 requested: 4s1 wins port 4, unit 6 cancelled.
    k = 9'b0_0010_0001; #1;
    check(sel[3][4][OP4S1] && !grant[3][5] && canc[3] == 5'b00100, "unit 6 cancelled");
    // port 4 taken by ALU (unit 2 s1): 6s2 never gets port 4.
    a = 8'b0001_0010; #1;
    check(!grant[3][0] && !grant[3][5] && canc[3] == 5'b00101, "units 4 and 6 cancelled");
    // nothing requested, nothing selected
    a = '0; k = '0; #1;
    check(sel[3] == '0 && canc[3] == '0, "idle");

    // ---- random comparison
    for (int i = 0; i < 4000; i++) begin
      a = 8'($urandom);
      k = 9'($urandom);
      if (i % 4 == 0) a &= 8'($urandom);   // lighter ALU load
      #1;
      check_all($sformatf("rand%0d", i));
      @(posedge clk);
    end
    // exhaustive over k with all ALUs idle and all busy
    for (int i = 0; i < 512; i++) begin
      a = (i % 2 == 0) ? 8'h00 : 8'hFF;
      k = 9'(i);
      #1;
      check_all($sformatf("exh%0d", i));
    end
    // all busy: every requested memory operand cancelled
    a = 8'hFF; k = 9'h1FF; #1;
    check(canc[2] == 5'h1F && grant[2] == '0, "all ALU ports busy cancels all units");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
