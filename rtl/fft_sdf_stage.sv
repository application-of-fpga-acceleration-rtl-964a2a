// fft_sdf_stage: one radix-2 decimation-in-frequency level of the pipelined
// FFT, built as a single-path delay-feedback (SDF) stage.
//
// The FFT has log2(N) such levels in a row; while one group of N points is in
// the last level, the next group is in the level before, and so on, so the
// pipeline accepts one point per enabled clock. Stage STAGE works on blocks
// of 2*D points, D = N / 2^(STAGE+1). A counter c runs over the block:
//   c <  D : the input x[c] is stored in the D-deep delay line, and the
//            difference stored during the previous block leaves the stage,
//            multiplied by the twiddle factor W_N^(c * 2^STAGE);
//   c >= D : the butterfly combines the stored x[c-D] with the input x[c];
//            the sum x[c-D] + x[c] leaves the stage and the difference
//            x[c-D] - x[c] goes into the delay line.
// So each block leaves as D sums followed (one block later) by D weighted
// differences, which is what the next level needs. The twiddle factors are
// computed at elaboration into a D-entry table. The output is registered:
// one enabled clock of latency on top of the D of the delay line.
//
// A point's valid bit travels with it. Valid groups fill whole blocks, so the
// differences that leave in the first half carry the valid bit of the block
// before (prev_valid). CNT_INIT sets the counter at reset so that a group
// enters this stage at c = 0; fft_core works it out from the upstream delays.
// Every register advances only on ce, the core's stall control. realign,
// given only while the stage holds no valid point, puts the counter back to
// its reset value.
module fft_sdf_stage
  import accel_pkg::*;
#(
  parameter int unsigned N        = 1024,
  parameter int unsigned STAGE    = 0,
  parameter int unsigned CNT_INIT = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ce,
  input  logic  realign,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  out_valid,
  output cplx_t out_data
);

  localparam int unsigned D  = N >> (STAGE + 1);
  localparam int unsigned CW = $clog2(2 * D);

  logic [CW-1:0] cnt;
  logic          second_half;
  cplx_t         fb_out, fb_in, bf_sum, bf_dif, mux_out, prod;
  cplx_t         tw;
  logic          mux_valid, prev_valid;

  // twiddle table W_N^(n * 2^STAGE), n = 0 .. D-1
  cplx_t tw_rom [D];
  initial begin
    for (int n = 0; n < int'(D); n++) tw_rom[n] = twiddle(n << STAGE, int'(N));
  end

  assign second_half = cnt[CW-1];

  // twiddle index n = c during the first half of the block
  localparam int unsigned TW = (D > 1) ? $clog2(D) : 1;
  logic [TW-1:0] tw_idx;
  if (D > 1) begin : g_idx
    assign tw_idx = cnt[TW-1:0];
  end else begin : g_idx0
    assign tw_idx = 1'b0;
  end

  fft_delay_line #(.WIDTH($bits(cplx_t)), .DEPTH(D)) u_fb (
    .clk, .rst_n, .ce, .din(fb_in), .dout(fb_out)
  );

  // butterfly
  fp32_add u_sum_re (.a(fb_out.re), .b(in_data.re),                         .y(bf_sum.re));
  fp32_add u_sum_im (.a(fb_out.im), .b(in_data.im),                         .y(bf_sum.im));
  fp32_add u_dif_re (.a(fb_out.re), .b({~in_data.re[31], in_data.re[30:0]}), .y(bf_dif.re));
  fp32_add u_dif_im (.a(fb_out.im), .b({~in_data.im[31], in_data.im[30:0]}), .y(bf_dif.im));

  always_comb begin
    if (second_half) begin
      fb_in     = bf_dif;
      mux_out   = bf_sum;
      mux_valid = in_valid;
      tw        = '{re: FP32_ONE, im: FP32_ZERO};
    end else begin
      fb_in     = in_data;
      mux_out   = fb_out;
      mux_valid = prev_valid;
      tw        = tw_rom[tw_idx];
    end
  end

  fp32_cmul u_tw (.a(mux_out), .w(tw), .y(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= CW'(CNT_INIT);
      prev_valid <= 1'b0;
      out_valid  <= 1'b0;
      out_data   <= '0;
    end else if (realign) begin
      cnt        <= CW'(CNT_INIT);
      prev_valid <= 1'b0;
      out_valid  <= 1'b0;
    end else if (ce) begin
      cnt       <= cnt + 1'b1;
      out_valid <= mux_valid;
      out_data  <= prod;
      if (cnt == CW'(2 * D - 1)) prev_valid <= in_valid;
    end
  end

endmodule
