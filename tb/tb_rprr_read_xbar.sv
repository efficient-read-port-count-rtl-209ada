// tb_rprr_read_xbar -- self-checking test of the operand/read-port crossbar.
//
// Random legal selection matrices are built in the testbench (each port takes
// either its own ALU operand, one memory operand not yet placed, or nothing),
// with random operand register numbers and random port data. The address half
// must put the selected operand's register number on each port and enable
// exactly the used ports; the data half must deliver each port's data to the
// operand that port was read for and zero to operands that got no port.
module tb_rprr_read_xbar;
  import rprr_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0;
  int unsigned failures = 0;

  sel_matrix_t                          sel, sel_data;
  preg_t [NUM_OPS-1:0]                  op_tag;
  preg_t [NUM_RD_PORTS-1:0]             rd_addr;
  logic  [NUM_RD_PORTS-1:0]             rd_port_en;
  logic  [NUM_RD_PORTS-1:0][XLEN-1:0]   rd_data;
  logic  [NUM_OPS-1:0][XLEN-1:0]        op_data;

  rprr_read_xbar dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int op_of_port [NUM_RD_PORTS];   // -1: unused

  initial begin
    for (int it = 0; it < 3000; it++) begin
      bit placed [NUM_MEM_OPS];
      foreach (placed[r]) placed[r] = 1'b0;
      sel = '0;
      for (int p = 0; p < NUM_RD_PORTS; p++) begin
        int choice;
        choice = $urandom_range(0, 2);
        op_of_port[p] = -1;
        if (choice == 0) begin
          op_of_port[p] = p;                       // its own ALU operand
        end else if (choice == 1) begin
          int r;
          r = $urandom_range(0, NUM_MEM_OPS - 1);
          if (!placed[r]) begin
            placed[r] = 1'b1;
            op_of_port[p] = NUM_ALU_OPS + r;
          end
        end
        if (op_of_port[p] >= 0) sel[p][op_of_port[p]] = 1'b1;
      end
      for (int o = 0; o < NUM_OPS; o++) op_tag[o] = preg_t'($urandom_range(0, PRF_ENTRIES - 1));
      for (int p = 0; p < NUM_RD_PORTS; p++) rd_data[p] = {$urandom, $urandom};
      sel_data = sel;
      #1;
      for (int p = 0; p < NUM_RD_PORTS; p++) begin
        check(rd_port_en[p] == (op_of_port[p] >= 0), $sformatf("it %0d port %0d enable", it, p));
        if (op_of_port[p] >= 0)
          check(rd_addr[p] == op_tag[op_of_port[p]], $sformatf("it %0d port %0d address", it, p));
      end
      for (int o = 0; o < NUM_OPS; o++) begin
        xlen_t exp;
        exp = '0;
        for (int p = 0; p < NUM_RD_PORTS; p++)
          if (op_of_port[p] == o) exp = rd_data[p];
        check(op_data[o] == exp, $sformatf("it %0d operand %0d data", it, o));
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
