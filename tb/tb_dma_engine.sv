// tb_dma_engine: self-checking test of the DMA engine with N = 16, against
// the host memory model (random read latency, random ready) and a stand-in
// for the FFT written here: it takes points with a random ready, delays
// them, and returns each point with its real and imaginary halves swapped
// and the real half inverted. Two jobs are run, one group and then five.
// Checked: every result lands at dst_addr + 8 * i with the expected value,
// nothing is written beyond the job, busy/done behave, and the read FIFO
// never overflows (its assertion, --assert).
module tb_dma_engine;
  import accel_pkg::*;

  localparam int N = 16;

  logic clk = 0, rst_n = 0;
  logic        start, busy, done;
  logic [63:0] src_addr, dst_addr;
  logic [31:0] n_groups;
  logic        rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [63:0] rd_req_addr, rd_rsp_data, wr_addr, wr_data;
  logic        fft_in_valid, fft_in_ready, fft_out_valid, fft_out_ready;
  cplx_t       fft_in_data, fft_out_data;
  int checks = 0, failures = 0, n_done = 0;

  always #5 clk = ~clk;

  dma_engine #(.N(N)) dut (.*);
  host_mem_model #(.MAX_LAT(12), .READY_PCT(70)) host (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  // FFT stand-in
  cplx_t q [$];
  always @(negedge clk) begin
    fft_in_ready  = ($urandom_range(3) != 0);
    fft_out_valid = (q.size() > 3) || (q.size() != 0 && $urandom_range(1) == 0);
    fft_out_data  = (q.size() != 0) ? '{re: ~q[0].im, im: q[0].re} : '0;
  end
  always @(posedge clk) begin
    if (rst_n && fft_out_valid && fft_out_ready) void'(q.pop_front());
    if (rst_n && fft_in_valid && fft_in_ready) q.push_back(fft_in_data);
    if (done) n_done++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_job(input longint src, input longint dst, input int groups);
    logic [63:0] v, e;
    int d0;
    for (int i = 0; i < groups * N + 4; i++) host.mem[(dst >> 3) + longint'(i)] = 64'hDEAD_BEEF_0000_0000;
    for (int i = 0; i < groups * N; i++) host.mem[(src >> 3) + longint'(i)] = {$urandom, $urandom};
    d0 = n_done;
    @(negedge clk);
    src_addr = src; dst_addr = dst; n_groups = groups; start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set"); end
    wait (!busy);
    repeat (3) @(posedge clk);
    checks++;
    if (n_done != d0 + 1) begin failures++; $display("FAIL done pulses %0d", n_done - d0); end
    for (int i = 0; i < groups * N + 4; i++) begin
      v = host.peek((dst >> 3) + longint'(i));
      if (i < groups * N) begin
        e = host.peek((src >> 3) + longint'(i));
        e = {~e[31:0], e[63:32]};
      end else begin
        e = 64'hDEAD_BEEF_0000_0000;
      end
      checks++;
      if (v !== e) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d: %h expected %h", i, v, e);
      end
    end
  endtask

  initial begin
    start = 0; src_addr = '0; dst_addr = '0; n_groups = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(64'h1_0000, 64'h8_0000, 1);
    run_job(64'h2_0000, 64'h9_0000, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
