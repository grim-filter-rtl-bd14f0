// tb_token_extractor: checks that a read is cut into the right tokens.
//
// Random reads (100 bases, 5-base tokens) are loaded; every token leaving the
// extractor is compared with a token computed here from the read (first base
// in the most significant position), along with tok_last, the token count
// (96) and the timing: the first token is valid the cycle after start, and
// with tok_ready held high the 96 tokens leave in 96 consecutive cycles. The
// second half of the run drops tok_ready at random.
module tb_token_extractor;
  localparam int unsigned RL = 100, N = 5, NTOK = RL - N + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, tok_valid, tok_ready = 1'b1, tok_last;
  logic [2*RL-1:0] read_seq = '0;
  logic [2*N-1:0] tok_value;
  int checks = 0, failures = 0;

  token_extractor #(.READ_LEN(RL), .TOKEN_LEN(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 20; r++) begin
      automatic int got = 0, cyc = 0;
      for (int i = 0; i < int'(RL); i++) read_seq[2*i +: 2] = 2'($urandom);
      @(negedge clk);
      check(!busy && !tok_valid, "idle before start");
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      check(tok_valid, "first token valid one cycle after start");
      while (got < int'(NTOK)) begin
        tok_ready = (r < 10) ? 1'b1 : 1'($urandom % 2);
        #1;
        if (tok_valid && tok_ready) begin
          automatic int exp = 0;
          for (int b = 0; b < int'(N); b++) exp = exp*4 + int'(read_seq[2*(got+b) +: 2]);
          check(int'(tok_value) == exp, $sformatf("token %0d = %0d, expected %0d", got, tok_value, exp));
          check(tok_last == (got == int'(NTOK) - 1), "tok_last");
          got++;
        end
        cyc++;
        @(negedge clk);
      end
      if (r < 10) check(cyc == int'(NTOK), $sformatf("96 tokens in %0d cycles", cyc));
      check(!tok_valid, "no token after the last");
      tok_ready = 1'b1;
    end
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
