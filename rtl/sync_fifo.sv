// sync_fifo: single-clock first-in first-out buffer, used to hold the seed
// locations of a window between the moment the read mapper hands them over
// and the moment the seed location checker has the window's bitmask.
//
// Storage is a DEPTH x WIDTH register array with read and write pointers one
// bit wider than the index. Interface: valid/ready on both sides; `in_ready`
// is low when full, `out_valid` high when not empty, and `out_data` shows the
// oldest entry without a read latency (first-word fall-through). A write and
// a read may happen in the same cycle. DEPTH must be a power of two. The
// buffer itself is this design's addition; the paper does not say where the
// seed list waits while the bitmask is computed.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  assign in_ready  = (wptr - rptr) != (AW+1)'(DEPTH);
  assign out_valid = (wptr != rptr);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + 1'b1;
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end

  initial assert (DEPTH == (1 << AW)) else $error("sync_fifo: DEPTH must be a power of two");

endmodule
