// tb_fft_core: self-checking test of the streaming FFT, run at N = 64.
// Every result is compared with a DFT computed here in double precision from
// the same single-precision inputs (tolerance 1e-5 of the group's largest
// bin). Three phases:
//   1. one group on its own: checks the latency 2N + log2(N) - 1 clocks from
//      the first point taken to the first result, and that the pipeline
//      drains by padding;
//   2. four groups back to back with a free output: checks that input and
//      output both move one point per clock, i.e. N clocks per group;
//   3. four groups with random input gaps and random output back-pressure:
//      checks that stalls keep the results exact.
module tb_fft_core;
  import accel_pkg::*;
  import tb_pkg::*;

  localparam int N    = 64;
  localparam int LOGN = 6;
  localparam int NG   = 9;

  logic clk = 0, rst_n = 0;
  logic  in_valid, in_ready, out_valid, out_ready, out_last, stall, padding, busy;
  cplx_t in_data, out_data;
  int checks = 0, failures = 0;
  int n_stall = 0, n_pad = 0, n_bp = 0, n_realign = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fft_core #(.N(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xr [NG*N], xi [NG*N], Xr [NG*N], Xi [NG*N], gmax [NG];
  int  rd_idx = 0, wr_idx = 0;
  int  phase = 0;
  longint t_in [NG], t_out [NG], t_last_out [NG];
  int  in_gap_pct = 0, out_bp_pct = 0;

  // reference DFT of each group
  task automatic make_reference();
    real a, c, s;
    for (int g = 0; g < NG; g++) begin
      gmax[g] = 0.0;
      for (int k = 0; k < N; k++) begin
        Xr[g*N+k] = 0.0; Xi[g*N+k] = 0.0;
        for (int n = 0; n < N; n++) begin
          a = 2.0 * PI * real'((n * k) % N) / real'(N);
          c = $cos(a); s = -$sin(a);
          Xr[g*N+k] += xr[g*N+n] * c - xi[g*N+n] * s;
          Xi[g*N+k] += xr[g*N+n] * s + xi[g*N+n] * c;
        end
        if (absr(Xr[g*N+k]) + absr(Xi[g*N+k]) > gmax[g]) gmax[g] = absr(Xr[g*N+k]) + absr(Xi[g*N+k]);
      end
    end
  endtask

  // monitor: results and mechanisms
  always @(posedge clk) begin
    if (rst_n) begin
      if (stall) n_stall++;
      if (padding) n_pad++;
      if (dut.realign) n_realign++;
      if (out_valid && !out_ready) n_bp++;
      if (in_valid && in_ready) begin
        if (rd_idx % N == 0) t_in[rd_idx / N] = cyc;
      end
      if (out_valid && out_ready) begin
        automatic int g = wr_idx / N, k = wr_idx % N;
        automatic real er = absr(fp32_to_real(out_data.re) - Xr[wr_idx]);
        automatic real ei = absr(fp32_to_real(out_data.im) - Xi[wr_idx]);
        if (k == 0) t_out[g] = cyc;
        if (k == N - 1) t_last_out[g] = cyc;
        checks++;
        if (er > 1e-5 * gmax[g] + 1e-6 || ei > 1e-5 * gmax[g] + 1e-6 || out_last != (k == N - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d bin %0d: (%f,%f) expected (%f,%f)", g, k,
            fp32_to_real(out_data.re), fp32_to_real(out_data.im), Xr[wr_idx], Xi[wr_idx]);
        end
        wr_idx++;
      end
    end
  end

  // input driver
  int in_limit = 0;
  always @(negedge clk) begin
    in_valid = (rd_idx < in_limit) && ($urandom_range(99) >= in_gap_pct);
    in_data.re = real_to_fp32(xr[rd_idx % (NG*N)]);
    in_data.im = real_to_fp32(xi[rd_idx % (NG*N)]);
    out_ready = ($urandom_range(99) >= out_bp_pct);
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) rd_idx <= rd_idx + 1;

  initial begin
    for (int i = 0; i < NG*N; i++) begin
      xr[i] = fp32_to_real(real_to_fp32((real'($urandom_range(20000)) - 10000.0) / 10000.0));
      xi[i] = fp32_to_real(real_to_fp32((real'($urandom_range(20000)) - 10000.0) / 10000.0));
    end
    make_reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: one group
    in_limit = N;
    wait (wr_idx == N);
    @(posedge clk);
    checks++;
    if (t_out[0] - t_in[0] != 2*N + LOGN - 1) begin
      failures++;
      $display("FAIL latency %0d clocks, expected %0d", t_out[0] - t_in[0], 2*N + LOGN - 1);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after the single group"); end
    // phase 2: four groups back to back
    in_limit = 5 * N;
    wait (wr_idx == 5 * N);
    @(posedge clk);
    checks++;
    if (t_in[4] - t_in[1] != 3 * N || t_last_out[4] - t_out[1] != 4 * N - 1) begin
      failures++;
      $display("FAIL streaming: inputs %0d clocks, outputs %0d clocks for 4 groups", t_in[4] - t_in[1] + N, t_last_out[4] - t_out[1] + 1);
    end
    // phase 3: stalls and back-pressure
    in_gap_pct = 30; out_bp_pct = 40;
    in_limit = NG * N;
    wait (wr_idx == NG * N);
    @(posedge clk);
    checks += 2;
    if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end
    if (n_bp == 0 || n_pad == 0 || n_realign == 0) begin failures++; $display("FAIL back-pressure %0d padding %0d realign %0d", n_bp, n_pad, n_realign); end
    $display("stalls %0d padding steps %0d back-pressure clocks %0d realigns %0d", n_stall, n_pad, n_bp, n_realign);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
