// fft_reorder: output buffer that puts the FFT results into natural order.
//
// The delay-feedback pipeline delivers the N results of a group in
// bit-reversed order: the p-th point to arrive is X(bitrev(p)). This buffer
// writes the p-th point to address bitrev(p) of one of two N-point banks and
// reads the other bank out in address order, so X(0), X(1), ... X(N-1) leave
// in turn while the next group is being written (ping-pong). Input side:
// in_valid/in_ready, a point is taken on a clock where both are high, and
// in_ready is low while the bank being written still waits to be read. Output
// side: out_valid/out_ready with out_last on X(N-1); out_data is read from
// the bank combinationally. The ping-pong scheme is this design's choice.
module fft_reorder
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
  output logic  out_last
);

  localparam int unsigned LOGN = $clog2(N);

  cplx_t           mem [2*N];
  logic            wbank, rbank;
  logic [LOGN-1:0] wcnt, rcnt, wcnt_rev;
  logic [1:0]      full;

  always_comb begin
    for (int i = 0; i < int'(LOGN); i++) wcnt_rev[i] = wcnt[LOGN-1-i];
  end

  assign in_ready  = !full[wbank];
  assign out_valid = full[rbank];
  assign out_data  = mem[{rbank, rcnt}];
  assign out_last  = (rcnt == LOGN'(N - 1));

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[{wbank, wcnt_rev}] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0;
      rbank <= 1'b0;
      wcnt  <= '0;
      rcnt  <= '0;
      full  <= '0;
    end else begin
      if (in_valid && in_ready) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == LOGN'(N - 1)) begin
          full[wbank] <= 1'b1;
          wbank       <= ~wbank;
        end
      end
      if (out_valid && out_ready) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == LOGN'(N - 1)) begin
          full[rbank] <= 1'b0;
          rbank       <= ~rbank;
        end
      end
    end
  end

endmodule
