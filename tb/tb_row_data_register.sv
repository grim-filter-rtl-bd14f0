// tb_row_data_register: checks the logic-layer row data register.
//
// Random rows are loaded with random gaps; after each load the register must
// show the row and a one-cycle row_valid, keep the row while no load comes,
// and drop row_valid when a load coincides with clear.
module tb_row_data_register;
  localparam int unsigned WIDTH = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, load = 1'b0, row_valid;
  logic [WIDTH-1:0] row_in = '0, row_q, last = '0;
  int checks = 0, failures = 0;

  row_data_register #(.WIDTH(WIDTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!row_valid && row_q == '0, "empty after reset");
    for (int i = 0; i < 300; i++) begin
      load   = ($urandom % 3) != 0;
      clear  = ($urandom % 10) == 0;
      row_in = {$urandom, $urandom};
      @(negedge clk);
      if (load) last = row_in;
      check(row_valid == (load && !clear), "row_valid follows load");
      check(row_q == last, "row held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
