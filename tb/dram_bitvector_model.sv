// dram_bitvector_model: behavioural model (not synthesizable logic) of the
// DRAM stack as GRIM-Filter sees it, for testbenches only.
//
// The stack stores every bin's bitvector column-major: for bin window w and
// token r, row w*ROWS + r holds the existence bit of token r for the WINDOW
// bins of that window, bit b for bin w*WINDOW + b. A row request is taken when
// req_valid and req_ready are both high; the row comes back LATENCY cycles
// later as one rsp_valid cycle, in request order, modelling the bank's row
// buffer feeding the logic layer over the TSVs. req_ready drops at random for
// STALL_PCT percent of cycles while `stall_en` is high. Windows beyond NWIN
// read as all zeros. The testbench clears and fills `rows` directly, and
// must hold its reset for more than LATENCY cycles so the pipe is empty.
module dram_bitvector_model #(
  parameter int unsigned WINDOW    = 4096,
  parameter int unsigned WIN_W     = 13,
  parameter int unsigned ROW_W     = 10,
  parameter int unsigned NWIN      = 2,
  parameter int unsigned LATENCY   = 3,
  parameter int unsigned STALL_PCT = 25
) (
  input  logic              clk,
  input  logic              stall_en,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [WIN_W-1:0]  req_window,
  input  logic [ROW_W-1:0]  req_row,
  output logic              rsp_valid,
  output logic [WINDOW-1:0] rsp_data
);
  localparam int unsigned ROWS = 1 << ROW_W;

  logic [WINDOW-1:0] rows [NWIN*ROWS];
  logic              pipe_v [LATENCY];
  logic [WINDOW-1:0] pipe_d [LATENCY];

  initial begin
    for (int i = 0; i < int'(LATENCY); i++) begin
      pipe_v[i] = 1'b0;
      pipe_d[i] = '0;
    end
    req_ready = 1'b1;
  end

  assign rsp_valid = pipe_v[LATENCY-1];
  assign rsp_data  = pipe_d[LATENCY-1];

  always @(posedge clk) begin
    for (int i = int'(LATENCY) - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= req_valid && req_ready;
    if (req_valid && req_ready)
      pipe_d[0] <= (int'(req_window) < int'(NWIN)) ? rows[int'(req_window)*ROWS + int'(req_row)] : '0;
    req_ready <= !stall_en || (($urandom % 100) >= STALL_PCT);
  end

endmodule
