// fft_core: the spectrum-analysis unit, a streaming N-point FFT in single-
// precision floating point.
//
// log2(N) radix-2 delay-feedback stages (fft_sdf_stage) are chained, so that
// several groups of N points are in the pipeline at once: while one group is
// in the last stage the next is in the stage before it. A group is taken at
// one point per clock and the results come out at one point per clock,
// through fft_reorder, in natural order X(0) .. X(N-1). With no stalls the
// first result of a group appears 2N + log2(N) - 1 clocks after its first
// point was taken; back-to-back groups keep both sides busy every clock.
//
// The whole pipeline moves on one clock enable (ce):
//  * a group must enter whole and aligned to the stage counters (in_cnt = 0);
//    if in_valid drops in the middle of a group, the pipeline stalls;
//  * when no input is offered but points are still in flight, invalid
//    padding points are clocked in so that the last group drains out; a new
//    group arriving during padding waits for the next group boundary;
//  * once the pipeline is empty again (no valid point in flight) and not at
//    a group boundary, all stage counters are put back to their reset
//    values in one clock (realign), so the next group is taken at once;
//  * if the reorder buffer cannot take the point leaving the last stage, the
//    pipeline stalls (back-pressure from the result side).
// The stall/padding control and the reorder buffer are this design's choices.
//
// Interface: in_valid/in_ready/in_data (a point is taken when both are high;
// in_ready may depend on in_valid), out_valid/out_ready/out_data/out_last.
module fft_core
  import accel_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  cplx_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output cplx_t out_data,
  output logic  out_last,
  output logic  stall,        // a pipeline step was wanted but could not be taken
  output logic  padding,      // an invalid padding point is clocked in
  output logic  busy          // points in flight or results not yet read out
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned FW   = $clog2(4 * N);

  // Counter value a stage must hold at reset so that a group entering the
  // pipeline at in_cnt = 0 enters stage s at its counter value 0.
  function automatic int unsigned cnt_init(input int unsigned s);
    int unsigned off, d;
    off = 0;
    for (int unsigned j = 0; j < s; j++) off += (N >> (j + 1)) + 1;
    d = N >> s;                       // block length 2D of stage s
    return (d - (off % d)) % d;
  endfunction

  logic            ce, want_step, accept, in_group, realign;
  logic [LOGN-1:0] in_cnt;
  logic [FW-1:0]   inflight;
  logic            ro_ready;

  logic  v   [LOGN+1];
  cplx_t dat [LOGN+1];

  assign realign   = (inflight == 0) && (in_cnt != 0);
  assign want_step = in_group ? in_valid : (!realign && (in_valid || (inflight != 0)));
  assign ce        = want_step && !(v[LOGN] && !ro_ready);
  assign accept    = ce && in_valid && (in_group || in_cnt == 0);
  assign in_ready  = ce && (in_group || in_cnt == 0);
  assign stall     = want_step && !ce || (in_group && !in_valid);
  assign padding   = ce && !accept;

  assign v[0]   = accept;
  assign dat[0] = in_data;

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    fft_sdf_stage #(.N(N), .STAGE(s), .CNT_INIT(cnt_init(s))) u_stage (
      .clk, .rst_n, .ce, .realign,
      .in_valid (v[s]),   .in_data (dat[s]),
      .out_valid(v[s+1]), .out_data(dat[s+1])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt   <= '0;
      in_group <= 1'b0;
      inflight <= '0;
    end else begin
      if (realign) begin
        in_cnt <= '0;
      end else if (ce) begin
        in_cnt <= in_cnt + 1'b1;
        if (in_cnt == LOGN'(N - 1))    in_group <= 1'b0;
        else if (in_cnt == 0 && accept) in_group <= 1'b1;
      end
      inflight <= inflight + FW'(accept) - FW'(ce && v[LOGN]);
    end
  end

  fft_reorder #(.N(N)) u_reorder (
    .clk, .rst_n,
    .in_valid (ce && v[LOGN]), .in_ready(ro_ready), .in_data(dat[LOGN]),
    .out_valid, .out_ready, .out_data, .out_last
  );

  assign busy = (inflight != 0) || out_valid;

endmodule
