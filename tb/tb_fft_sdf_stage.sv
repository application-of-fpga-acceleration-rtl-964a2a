// tb_fft_sdf_stage: self-checking test of one delay-feedback FFT stage.
// Stage 0 and stage 1 of a 16-point FFT are driven with random complex blocks
// on a randomly gated clock enable, followed by invalid padding. For every
// block of 2D points the expected output, worked out here in double
// precision, is the D butterfly sums x[n] + x[n+D] followed by the D
// differences (x[n] - x[n+D]) * W_16^(n * 2^stage). Checked: values, the
// valid bits, and the latency of D + 1 enabled clocks from a block's first
// point to its first result.
module tb_fft_sdf_stage;
  import accel_pkg::*;
  import tb_pkg::*;

  localparam int N = 16;
  localparam int NBLK = 5;

  logic clk = 0, rst_n = 0, ce;
  logic  iv;
  cplx_t id;
  logic  ov [2];
  cplx_t od [2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fft_sdf_stage #(.N(N), .STAGE(0)) dut0 (.clk, .rst_n, .ce, .realign(1'b0), .in_valid(iv), .in_data(id), .out_valid(ov[0]), .out_data(od[0]));
  fft_sdf_stage #(.N(N), .STAGE(1)) dut1 (.clk, .rst_n, .ce, .realign(1'b0), .in_valid(iv), .in_data(id), .out_valid(ov[1]), .out_data(od[1]));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xr [NBLK*N], xi [NBLK*N];
  real er [2][NBLK*N], ei [2][NBLK*N];
  int  nexp [2], nout [2], first_out [2];

  task automatic compare(input int s, input cplx_t v);
    real gr, gi, tol;
    int k;
    k = nout[s];
    gr = fp32_to_real(v.re);
    gi = fp32_to_real(v.im);
    tol = 1e-6 * (absr(er[s][k]) + absr(ei[s][k]) + 1.0);
    checks++;
    if (absr(gr - er[s][k]) > tol || absr(gi - ei[s][k]) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL stage %0d out %0d: (%f,%f) expected (%f,%f)", s, k, gr, gi, er[s][k], ei[s][k]);
    end
    nout[s]++;
  endtask

  initial begin
    int step, D, npts;
    real wr, wi, dr, di;
    cplx_t w;
    // stimulus and expected output, stage s uses blocks of 2D = N >> s
    npts = NBLK * N;
    for (int i = 0; i < npts; i++) begin
      id.re = real_to_fp32((real'($urandom_range(2000)) - 1000.0) / 100.0);
      id.im = real_to_fp32((real'($urandom_range(2000)) - 1000.0) / 100.0);
      xr[i] = fp32_to_real(id.re);
      xi[i] = fp32_to_real(id.im);
    end
    for (int s = 0; s < 2; s++) begin
      D = (N >> s) / 2;
      nexp[s] = 0;
      for (int b = 0; b < npts; b += 2 * D) begin
        for (int n = 0; n < D; n++) begin
          er[s][nexp[s]] = xr[b+n] + xr[b+n+D];
          ei[s][nexp[s]] = xi[b+n] + xi[b+n+D];
          nexp[s]++;
        end
        for (int n = 0; n < D; n++) begin
          w = twiddle(n << s, N);
          wr = fp32_to_real(w.re); wi = fp32_to_real(w.im);
          dr = xr[b+n] - xr[b+n+D];
          di = xi[b+n] - xi[b+n+D];
          er[s][nexp[s]] = dr * wr - di * wi;
          ei[s][nexp[s]] = dr * wi + di * wr;
          nexp[s]++;
        end
      end
      nout[s] = 0;
      first_out[s] = -1;
    end

    ce = 0; iv = 0; id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    step = 0;
    // valid blocks, then padding until everything has come out
    while (step < npts + N + 4) begin
      @(negedge clk);
      ce = ($urandom_range(3) != 0);
      iv = (step < npts);
      if (step < npts) begin
        id.re = real_to_fp32(xr[step]);
        id.im = real_to_fp32(xi[step]);
      end else begin
        id = '0;
      end
      @(posedge clk);
      #1;
      if (ce) begin
        step++;
        for (int s = 0; s < 2; s++) begin
          if (ov[s]) begin
            if (first_out[s] < 0) first_out[s] = step;
            if (nout[s] < nexp[s]) compare(s, od[s]);
            else begin checks++; failures++; $display("FAIL stage %0d: extra output", s); end
          end
        end
      end
    end
    for (int s = 0; s < 2; s++) begin
      D = (N >> s) / 2;
      checks++;
      if (nout[s] != nexp[s]) begin failures++; $display("FAIL stage %0d: %0d outputs, expected %0d", s, nout[s], nexp[s]); end
      checks++;
      if (first_out[s] != D + 1) begin failures++; $display("FAIL stage %0d: latency %0d, expected %0d", s, first_out[s], D + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
