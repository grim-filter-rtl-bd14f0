// seed_location_checker: keeps the seed locations whose bin passed the filter
// and drops the rest.
//
// Once the filter bitmask generator has finished a bin window, the checker
// takes a copy of the window's seed location filter bitmask and of how many
// seed locations the window holds. It then takes those seed locations one by
// one, in the order the read mapper gave them, looks up the bitmask bit of
// the bin that holds each one, and passes the location on to the read mapper
// for sequence alignment only if the bit is 1. Holding its own copy of the
// bitmask lets the generator start on the next window while the checker and
// the mapper work through this one, which is how the paper overlaps
// filtering with alignment. In the paper this step runs as software on the
// host; here it is logic, with the same function.
//
// Interface (valid/ready): `bm_*` hands over a bitmask and a seed count
// (accepted only when the previous window is fully checked); `seed_*` is the
// seed stream {location, bin offset in window}; `out_*` carries the kept
// locations. Timing: one seed per cycle while `out_ready` is high; a kept
// seed appears on `out_*` the cycle after it is taken. `ev_keep` and
// `ev_discard` pulse once per seed decided.
module seed_location_checker #(
  parameter int unsigned WINDOW = grim_pkg::WINDOW_BINS,
  parameter int unsigned LOC_W  = grim_pkg::LOC_W,
  parameter int unsigned CNT_W  = $clog2(grim_pkg::SEED_DEPTH + 1),
  parameter int unsigned OFF_W  = $clog2(WINDOW)
) (
  input  logic              clk,
  input  logic              rst_n,
  // bitmask of a finished window
  input  logic              bm_valid,
  output logic              bm_ready,
  input  logic [WINDOW-1:0] bm_data,
  input  logic [CNT_W-1:0]  bm_nseeds,
  // seed locations of that window
  input  logic              seed_valid,
  output logic              seed_ready,
  input  logic [LOC_W-1:0]  seed_loc,
  input  logic [OFF_W-1:0]  seed_off,
  // locations to align
  output logic              out_valid,
  input  logic              out_ready,
  output logic [LOC_W-1:0]  out_loc,
  // events
  output logic              ev_keep,
  output logic              ev_discard
);
  logic [WINDOW-1:0] mask_q;
  logic [CNT_W-1:0]  left;
  logic              take;
  logic              keep;

  assign bm_ready   = (left == '0);
  assign take       = (left != '0) && seed_valid && (!out_valid || out_ready);
  assign seed_ready = take;
  assign keep       = mask_q[seed_off];
  assign ev_keep    = take && keep;
  assign ev_discard = take && !keep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q    <= '0;
      left      <= '0;
      out_valid <= 1'b0;
      out_loc   <= '0;
    end else begin
      if (bm_valid && bm_ready) begin
        mask_q <= bm_data;
        left   <= bm_nseeds;
      end else if (take) begin
        left <= left - CNT_W'(1);
      end
      if (take) begin
        out_valid <= keep;
        if (keep) out_loc <= seed_loc;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_loc));

endmodule
