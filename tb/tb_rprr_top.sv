// tb_rprr_top -- end-to-end test of the reduced-read-port register-read stage.
//
// The top runs with all its defaults: the four-connection scheme, 180 entries,
// 64-bit values. The testbench plays the scheduler and the write-back side:
//   * every cycle each ALU operand requests its port with a random probability
//     (vector a), with a random source register;
//   * each of the five memory units holds at most one instruction; a new one
//     needs s1, s2 or both (the store-data unit only s2). A unit the stage
//     cancels keeps its instruction and retries it in the next cycle, as the
//     paper's scheduler does;
//   * up to ten writes to distinct registers per cycle update a shadow copy.
// A reference model of the port priorities predicts S and the cancels of the
// issue cycle; one cycle later every valid operand must carry the value its
// register held before that cycle's writes, and a cancelled unit's operands
// must be invalid. ALU operand traffic varies in phases (light, heavy, none)
// so that every mechanism shows up. Counted, and each required to occur:
// ALU reads, memory reads on the first connected port, on a fallback port,
// cancels, successful retries, a granted port wasted by a cancelled unit,
// read-during-write, all eight ports busy, and a unit cancelled two cycles in a
// row.
module tb_rprr_top;
  import rprr_pkg::*;

  localparam int unsigned CYCLES = 4000;
  localparam conn_matrix_t CONN = DEFAULT_SCHEME;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  int unsigned checks = 0;
  int unsigned failures = 0;

  logic  [NUM_ALU_OPS-1:0]             alu_req;
  preg_t [NUM_ALU_OPS-1:0]             alu_tag;
  logic  [NUM_MEM_OPS-1:0]             mem_req;
  preg_t [NUM_MEM_OPS-1:0]             mem_tag;
  sel_matrix_t                         sel;
  logic  [NUM_MEM_UNITS-1:0]           unit_cancel;
  logic  [NUM_ALU_OPS-1:0]             alu_op_valid;
  logic  [NUM_ALU_OPS-1:0][XLEN-1:0]   alu_op_data;
  logic  [NUM_MEM_OPS-1:0]             mem_op_valid;
  logic  [NUM_MEM_OPS-1:0][XLEN-1:0]   mem_op_data;
  logic  [NUM_WR_PORTS-1:0]            wr_en;
  preg_t [NUM_WR_PORTS-1:0]            wr_tag;
  logic  [NUM_WR_PORTS-1:0][XLEN-1:0]  wr_data;

  rprr_top dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ---- scheduler model: one pending instruction per memory unit
  logic  [1:0] pend_need [NUM_MEM_UNITS];   // bit0 s1, bit1 s2; 0 = empty
  preg_t       pend_tag  [NUM_MEM_UNITS][2];
  logic        pend_was_cancelled [NUM_MEM_UNITS];

  xlen_t shadow [PRF_ENTRIES];

  // expectations for the read cycle
  logic  [NUM_ALU_OPS-1:0] exp_alu_v;
  logic  [NUM_MEM_OPS-1:0] exp_mem_v;
  xlen_t exp_alu_d [NUM_ALU_OPS];
  xlen_t exp_mem_d [NUM_MEM_OPS];

  // mechanism counters
  int unsigned n_alu_read = 0, n_mem_first = 0, n_mem_fallback = 0, n_cancel = 0;
  int unsigned n_retry_ok = 0, n_wasted_port = 0, n_rd_wr_same = 0, n_all_busy = 0;
  int unsigned n_cancel_twice = 0;

  // Reference arbitration: port of each memory operand (-1 none), cancels.
  function automatic void ref_arb(input logic [7:0] av, input logic [8:0] kv,
                                  output int port_of [NUM_MEM_OPS], output logic [4:0] cancel);
    logic [7:0] taken, avail, low;
    taken  = av;
    cancel = '0;
    for (int r = 0; r < NUM_MEM_OPS; r++) begin
      port_of[r] = -1;
      if (kv[r]) begin
        avail = CONN[r] & ~taken;
        low   = avail & (~avail + 8'd1);
        if (low != 0) begin
          port_of[r] = $clog2(low);
          taken |= low;
        end else cancel[r / 2] = 1'b1;
      end
    end
  endfunction

  function automatic int first_port(input logic [7:0] m);
    for (int p = 0; p < 8; p++) if (m[p]) return p;
    return -1;
  endfunction

  int  alu_pct;
  bit  have_exp;

  initial begin
    int         port_of [NUM_MEM_OPS];
    logic [4:0] cref;
    rst_n = 1'b0;
    alu_req = '0; alu_tag = '0; mem_req = '0; mem_tag = '0;
    wr_en = '0; wr_tag = '0; wr_data = '0;
    for (int u = 0; u < NUM_MEM_UNITS; u++) begin
      pend_need[u] = '0;
      pend_was_cancelled[u] = 1'b0;
    end
    have_exp = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // initialise every register through the write ports
    for (int base = 0; base < PRF_ENTRIES; base += NUM_WR_PORTS) begin
      wr_en = '0;
      for (int w = 0; w < NUM_WR_PORTS; w++)
        if (base + w < PRF_ENTRIES) begin
          wr_en[w] = 1'b1; wr_tag[w] = preg_t'(base + w); wr_data[w] = {$urandom, $urandom};
        end
      @(posedge clk);
      for (int w = 0; w < NUM_WR_PORTS; w++) if (wr_en[w]) shadow[wr_tag[w]] = wr_data[w];
      @(negedge clk);
    end
    wr_en = '0;
    @(negedge clk);
    check(alu_op_valid == '0 && mem_op_valid == '0, "nothing valid without requests");

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      bit used [PRF_ENTRIES];
      // phases of ALU load: light, heavy, idle, saturated
      case ((cyc / 250) % 4)
        0: alu_pct = 30;
        1: alu_pct = 70;
        2: alu_pct = 0;
        default: alu_pct = 100;
      endcase
      // ---- drive the issue cycle
      for (int i = 0; i < NUM_ALU_OPS; i++) begin
        alu_req[i] = 1'($urandom_range(0, 99) < alu_pct);
        alu_tag[i] = preg_t'($urandom_range(0, PRF_ENTRIES - 1));
      end
      for (int u = 0; u < NUM_MEM_UNITS; u++) begin
        if (pend_need[u] == '0 && $urandom_range(0, 99) < 80) begin
          pend_need[u] = (u == NUM_MEM_UNITS - 1) ? 2'b10 : 2'($urandom_range(1, 3));
          pend_tag[u][0] = preg_t'($urandom_range(0, PRF_ENTRIES - 1));
          pend_tag[u][1] = preg_t'($urandom_range(0, PRF_ENTRIES - 1));
          pend_was_cancelled[u] = 1'b0;
        end
      end
      mem_req = '0;
      for (int r = 0; r < NUM_MEM_OPS; r++) begin
        int u, s;
        u = r / 2;
        s = (u == NUM_MEM_UNITS - 1) ? 1 : r % 2;   // unit 8's single operand is s2
        mem_req[r] = pend_need[u][s];
        mem_tag[r] = pend_tag[u][s];
      end
      foreach (used[e]) used[e] = 1'b0;
      for (int w = 0; w < NUM_WR_PORTS; w++) begin
        int e;
        e = ($urandom_range(0, 9) == 0) ? int'(mem_tag[$urandom_range(0, NUM_MEM_OPS - 1)])
                                        : $urandom_range(0, PRF_ENTRIES - 1);
        wr_en[w]   = 1'($urandom_range(0, 1)) && !used[e];
        wr_tag[w]  = preg_t'(e);
        wr_data[w] = {$urandom, $urandom};
        if (wr_en[w]) used[e] = 1'b1;
      end
      #1;
      // ---- check the issue-cycle outputs
      ref_arb(alu_req, mem_req, port_of, cref);
      check(unit_cancel == cref, $sformatf("cyc %0d cancel %b exp %b", cyc, unit_cancel, cref));
      for (int p = 0; p < NUM_RD_PORTS; p++) begin
        op_sel_t exp_row;
        exp_row = '0;
        if (alu_req[p]) exp_row[p] = 1'b1;
        for (int r = 0; r < NUM_MEM_OPS; r++) if (port_of[r] == p) exp_row[NUM_ALU_OPS + r] = 1'b1;
        check(sel[p] == exp_row, $sformatf("cyc %0d S row %0d", cyc, p));
      end
      // expectations for the next cycle (values before this cycle's writes)
      for (int i = 0; i < NUM_ALU_OPS; i++) begin
        exp_alu_v[i] = alu_req[i];
        exp_alu_d[i] = shadow[alu_tag[i]];
        if (alu_req[i]) n_alu_read++;
      end
      for (int r = 0; r < NUM_MEM_OPS; r++) begin
        exp_mem_v[r] = mem_req[r] && port_of[r] >= 0 && !cref[r / 2];
        exp_mem_d[r] = shadow[mem_tag[r]];
        if (port_of[r] >= 0) begin
          if (port_of[r] == first_port(CONN[r])) n_mem_first++;
          else n_mem_fallback++;
          if (cref[r / 2]) n_wasted_port++;
        end
      end
      for (int r = 0; r < NUM_MEM_OPS; r++)
        for (int w = 0; w < NUM_WR_PORTS; w++)
          if (exp_mem_v[r] && wr_en[w] && wr_tag[w] == mem_tag[r]) n_rd_wr_same++;
      begin
        logic [7:0] busy;
        busy = '0;
        for (int p = 0; p < NUM_RD_PORTS; p++) busy[p] = |sel[p];
        if (busy == 8'hFF && mem_req != '0 && alu_req != 8'hFF) n_all_busy++;
      end
      // ---- clock edge: writes land, scheduler sees the cancels
      @(posedge clk);
      for (int w = 0; w < NUM_WR_PORTS; w++) if (wr_en[w]) shadow[wr_tag[w]] = wr_data[w];
      for (int u = 0; u < NUM_MEM_UNITS; u++) begin
        if (pend_need[u] != '0) begin
          if (cref[u]) begin
            n_cancel++;
            if (pend_was_cancelled[u]) n_cancel_twice++;
            pend_was_cancelled[u] = 1'b1;
          end else begin
            if (pend_was_cancelled[u]) n_retry_ok++;
            pend_need[u] = '0;
          end
        end
      end
      // ---- read cycle: operand values, exactly one cycle after issue
      @(negedge clk);
      check(alu_op_valid == exp_alu_v, $sformatf("cyc %0d ALU valid", cyc));
      check(mem_op_valid == exp_mem_v, $sformatf("cyc %0d mem valid %b exp %b", cyc, mem_op_valid, exp_mem_v));
      for (int i = 0; i < NUM_ALU_OPS; i++)
        if (exp_alu_v[i]) check(alu_op_data[i] == exp_alu_d[i], $sformatf("cyc %0d ALU op %0d data", cyc, i));
      for (int r = 0; r < NUM_MEM_OPS; r++)
        if (exp_mem_v[r]) check(mem_op_data[r] == exp_mem_d[r], $sformatf("cyc %0d mem op %0d data", cyc, r));
    end

    $display("mechanisms: alu_read=%0d mem_first_port=%0d mem_fallback_port=%0d cancel=%0d retry_ok=%0d",
             n_alu_read, n_mem_first, n_mem_fallback, n_cancel, n_retry_ok);
    $display("            wasted_port=%0d read_during_write=%0d all_ports_busy=%0d cancel_twice=%0d",
             n_wasted_port, n_rd_wr_same, n_all_busy, n_cancel_twice);
    check(n_alu_read > 0,     "ALU dedicated-port read happened");
    check(n_mem_first > 0,    "memory operand on its first connected port happened");
    check(n_mem_fallback > 0, "memory operand on a fallback port happened");
    check(n_cancel > 0,       "cancel happened");
    check(n_retry_ok > 0,     "retry after cancel happened");
    check(n_wasted_port > 0,  "port granted to a cancelled unit happened");
    check(n_rd_wr_same > 0,   "read during write happened");
    check(n_all_busy > 0,     "all read ports busy with sharing happened");
    check(n_cancel_twice > 0, "repeated cancel happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (CYCLES * 2 + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
