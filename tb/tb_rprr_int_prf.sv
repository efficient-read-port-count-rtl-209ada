// tb_rprr_int_prf -- self-checking test of the 180-entry, 8-read / 10-write PRF.
//
// A shadow array in the testbench mirrors every write. Each cycle up to ten
// writes to distinct random entries and eight random reads are issued; the data
// of a read must appear in the next cycle and equal the shadow value from
// before that cycle's writes (read-old on a same-cycle write). Every entry is
// first written through port (entry mod 10) so that each write port is used
// and nothing uninitialised is read. Disabled read ports must hold their output.
module tb_rprr_int_prf;
  import rprr_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0;
  int unsigned failures = 0;

  logic  [NUM_RD_PORTS-1:0]             rd_en;
  preg_t [NUM_RD_PORTS-1:0]             rd_addr;
  logic  [NUM_RD_PORTS-1:0][XLEN-1:0]   rd_data;
  logic  [NUM_WR_PORTS-1:0]             wr_en;
  preg_t [NUM_WR_PORTS-1:0]             wr_addr;
  logic  [NUM_WR_PORTS-1:0][XLEN-1:0]   wr_data;

  rprr_int_prf dut (
    .clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data
  );

  xlen_t shadow [PRF_ENTRIES];
  xlen_t exp_rd [NUM_RD_PORTS];
  logic  exp_en [NUM_RD_PORTS];
  int unsigned same_cycle_rw = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    rd_en = '0; wr_en = '0; rd_addr = '0; wr_addr = '0; wr_data = '0;
    // fill every entry, ten per cycle, entry e through port e % 10
    for (int base = 0; base < PRF_ENTRIES; base += NUM_WR_PORTS) begin
      @(negedge clk);
      wr_en = '0;
      for (int w = 0; w < NUM_WR_PORTS; w++)
        if (base + w < PRF_ENTRIES) begin
          wr_en[w]   = 1'b1;
          wr_addr[w] = preg_t'(base + w);
          wr_data[w] = {$urandom, $urandom};
          shadow[base + w] = wr_data[w];
        end
    end
    @(negedge clk);
    wr_en = '0;
    for (int p = 0; p < NUM_RD_PORTS; p++) exp_en[p] = 1'b0;

    for (int it = 0; it < 3000; it++) begin
      // inputs for this cycle
      bit used [PRF_ENTRIES];
      foreach (used[e]) used[e] = 1'b0;
      for (int p = 0; p < NUM_RD_PORTS; p++) begin
        rd_en[p]   = 1'($urandom_range(0, 3) != 0) || it == 0;
        rd_addr[p] = preg_t'($urandom_range(0, PRF_ENTRIES - 1));
        if (rd_en[p]) exp_rd[p] = shadow[rd_addr[p]];
        exp_en[p]  = rd_en[p];
      end
      for (int w = 0; w < NUM_WR_PORTS; w++) begin
        int e;
        e = (w < NUM_RD_PORTS && $urandom_range(0, 7) == 0) ? int'(rd_addr[w])
                                                           : $urandom_range(0, PRF_ENTRIES - 1);
        wr_en[w] = 1'($urandom_range(0, 1)) && !used[e];
        wr_addr[w] = preg_t'(e);
        wr_data[w] = {$urandom, $urandom};
        if (wr_en[w]) used[e] = 1'b1;
      end
      for (int p = 0; p < NUM_RD_PORTS; p++)
        for (int w = 0; w < NUM_WR_PORTS; w++)
          if (rd_en[p] && wr_en[w] && rd_addr[p] == wr_addr[w]) same_cycle_rw++;
      @(posedge clk);
      for (int w = 0; w < NUM_WR_PORTS; w++)
        if (wr_en[w]) shadow[wr_addr[w]] = wr_data[w];
      @(negedge clk);
      for (int p = 0; p < NUM_RD_PORTS; p++)
        check(rd_data[p] == exp_rd[p], $sformatf("it %0d port %0d data %h exp %h (en %0d)",
                                                 it, p, rd_data[p], exp_rd[p], exp_en[p]));
    end
    check(same_cycle_rw > 0, "a read met a write to the same entry");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
