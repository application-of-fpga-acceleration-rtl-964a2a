// tb_fpga_accel_top: end-to-end test of the accelerator at its default size
// (N = 1024 points of 64 bits per group), with the host memory model on the
// PCIe side. Input groups follow the evaluated test signal,
//   x(t) = 0.7 cos(2 pi 50 MHz t) + sin(2 pi 12 MHz t) + 0.1 n(t),
// n(t) Gaussian (Box-Muller), sampled at 1 GS/s, as the real part of each
// point (imaginary part 0). Three jobs:
//   A. one group at a time: the host starts a one-group job and waits;
//   B. four groups in one continuous job with an always-ready host: checks
//      one point per clock, i.e. 4N clocks for four groups plus the latency;
//   C. three groups with a slow host (random ready, read latency up to 16):
//      input starvation stalls the FFT and write back-pressure stalls it
//      from the other end.
// Every spectrum is compared with a double-precision DFT of the same inputs,
// the two largest bins of the first must be the 12 MHz and 50 MHz tones
// (bins 12 and 51), and each mechanism (stall, padding drain, write
// back-pressure, several groups in flight) must have happened.
module tb_fpga_accel_top;
  import accel_pkg::*;
  import tb_pkg::*;

  localparam int N  = 1024;
  localparam int NG = 8;

  logic clk = 0, rst_n = 0;
  logic        start, busy, done;
  logic [63:0] src_addr, dst_addr;
  logic [31:0] n_groups;
  logic        rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [63:0] rd_req_addr, rd_rsp_data, wr_addr, wr_data;
  logic        fft_stall, fft_padding, fft_busy, result_last;
  int checks = 0, failures = 0;
  int n_stall = 0, n_pad = 0, n_wbp = 0, n_overlap = 0, n_last = 0;
  longint cyc = 0;

  always #2 clk = ~clk;   // 250 MHz
  always @(posedge clk) cyc <= cyc + 1;

  fpga_accel_top dut (.*);
  host_mem_model #(.MAX_LAT(16), .READY_PCT(100)) host (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanisms
  int reads_done = 0, writes_done = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (fft_stall) n_stall++;
      if (fft_padding) n_pad++;
      if (wr_valid && !wr_ready) n_wbp++;
      if (wr_valid && wr_ready && result_last) n_last++;
      if (rd_req_valid && rd_req_ready) reads_done++;
      if (wr_valid && wr_ready) writes_done++;
      // a later group is being read while an earlier one is still unwritten
      if (rd_req_valid && rd_req_ready && reads_done / N > writes_done / N + 1) n_overlap++;
    end
  end

  real xr [NG*N], cs [N], sn [N];
  localparam longint SRC = 64'h1000_0000, DST = 64'h2000_0000;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    u2 = real'($urandom_range(1000000)) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  // check the spectrum of input group g, written to result slot r
  task automatic check_group(input int g, input longint dst, input int r, input bit peaks);
    real Xr, Xi, gr, gi, m, m1, m2, tol, gmax;
    real mag [N];
    int k1, k2;
    logic [63:0] w;
    gmax = 0.0;
    for (int k = 0; k < N; k++) begin
      Xr = 0.0; Xi = 0.0;
      for (int n = 0; n < N; n++) begin
        Xr += xr[g*N+n] * cs[(n*k) % N];
        Xi += xr[g*N+n] * sn[(n*k) % N];
      end
      mag[k] = $sqrt(Xr*Xr + Xi*Xi);
      if (mag[k] > gmax) gmax = mag[k];
      w = host.peek((dst >> 3) + longint'(r*N + k));
      gr = fp32_to_real(w[63:32]);
      gi = fp32_to_real(w[31:0]);
      tol = 2e-5 * 1024.0 + 1e-6;
      checks++;
      if (absr(gr - Xr) > tol || absr(gi - Xi) > tol) begin
        failures++;
        if (failures < 10) $display("FAIL group %0d bin %0d: (%f,%f) expected (%f,%f)", g, k, gr, gi, Xr, Xi);
      end
    end
    if (peaks) begin
      m1 = 0.0; m2 = 0.0; k1 = -1; k2 = -1;
      for (int k = 1; k < N/2; k++) begin
        w = host.peek((dst >> 3) + longint'(r*N + k));
        gr = fp32_to_real(w[63:32]); gi = fp32_to_real(w[31:0]);
        m = $sqrt(gr*gr + gi*gi);
        if (m > m1) begin m2 = m1; k2 = k1; m1 = m; k1 = k; end
        else if (m > m2) begin m2 = m; k2 = k; end
      end
      checks++;
      if (!((k1 == 12 && k2 == 51) || (k1 == 51 && k2 == 12))) begin
        failures++;
        $display("FAIL spectral peaks at bins %0d and %0d, expected 12 and 51", k1, k2);
      end
      $display("group %0d: largest bins %0d (|X|/(N/2) = %f) and %0d (%f)", g, k1, m1 / (N/2), k2, m2 / (N/2));
    end
  endtask

  task automatic run_job(input int g0, input int groups, input longint dst, output longint cycles);
    longint t0;
    for (int i = 0; i < groups * N; i++)
      host.mem[(SRC >> 3) + i] = {real_to_fp32(xr[(g0*N) + i]), 32'h0};
    @(negedge clk);
    src_addr = SRC; dst_addr = dst; n_groups = groups; start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    wait (done);
    cycles = cyc - t0;
    @(posedge clk);
  endtask

  initial begin
    longint ca, cb, cc;
    for (int n = 0; n < N; n++) begin
      cs[n] = $cos(2.0 * PI * real'(n) / real'(N));
      sn[n] = -$sin(2.0 * PI * real'(n) / real'(N));
    end
    for (int i = 0; i < NG*N; i++) begin
      real t;
      t = real'(i % N) * 1.0e-9;
      xr[i] = fp32_to_real(real_to_fp32(0.7 * $cos(2.0*PI*50.0e6*t) + $sin(2.0*PI*12.0e6*t) + 0.1 * gauss()));
    end
    start = 0; src_addr = '0; dst_addr = '0; n_groups = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // A: one group at a time
    run_job(0, 1, DST, ca);
    $display("job A: 1 group in %0d clocks (%.2f us at 250 MHz)", ca, real'(ca) * 4.0e-3);
    check_group(0, DST, 0, 1);
    // B: continuous stream of four groups
    run_job(1, 4, DST + 64'h10_0000, cb);
    $display("job B: 4 groups in %0d clocks", cb);
    for (int g = 0; g < 4; g++) check_group(1 + g, DST + 64'h10_0000, g, 0);
    checks++;
    if (cb > 4 * N + 2 * N + 64) begin
      failures++;
      $display("FAIL continuous job took %0d clocks, expected at most %0d", cb, 6 * N + 64);
    end
    // C: slow host
    host.ready_pct = 60;
    run_job(5, 3, DST + 64'h20_0000, cc);
    $display("job C: 3 groups in %0d clocks with a slow host", cc);
    for (int g = 0; g < 3; g++) check_group(5 + g, DST + 64'h20_0000, g, 0);

    checks += 5;
    if (n_stall == 0)   begin failures++; $display("FAIL no FFT stall"); end
    if (n_pad == 0)     begin failures++; $display("FAIL no padding drain"); end
    if (n_wbp == 0)     begin failures++; $display("FAIL no write back-pressure"); end
    if (n_overlap == 0) begin failures++; $display("FAIL never two groups in flight"); end
    if (n_last != NG)   begin failures++; $display("FAIL %0d group ends, expected %0d", n_last, NG); end
    $display("stall clocks %0d, padding steps %0d, write back-pressure clocks %0d, overlapped reads %0d",
             n_stall, n_pad, n_wbp, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
