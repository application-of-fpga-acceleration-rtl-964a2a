// tb_fft_reorder: self-checking test of the bit-reversal output buffer,
// N = 16. Groups are written in bit-reversed order (the p-th word written
// carries the tag of index bitrev(p)) with random gaps, and read with a
// random out_ready. Checked: every group leaves in natural order, out_last
// marks the 16th word, and in_ready drops while both banks are full.
module tb_fft_reorder;
  import accel_pkg::*;

  localparam int N = 16;
  localparam int NG = 6;

  logic clk = 0, rst_n = 0;
  logic  in_valid, in_ready, out_valid, out_ready, out_last;
  cplx_t in_data, out_data;
  int checks = 0, failures = 0, backpressure = 0;

  always #5 clk = ~clk;

  fft_reorder #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitrev4(input int p);
    return {p[0], p[1], p[2], p[3]};
  endfunction

  int wg = 0, wp = 0, rg = 0, rp = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) backpressure++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data.re != 32'(rg) || out_data.im != 32'(rp) || out_last != (rp == N - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d index %0d: got %0d/%0d last %0b", rg, rp, out_data.re, out_data.im, out_last);
        end
        rp++;
        if (rp == N) begin rp = 0; rg++; end
      end
      if (in_valid && in_ready) begin
        wp++;
        if (wp == N) begin wp = 0; wg++; end
      end
    end
  end

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (rg < NG) begin
      @(negedge clk);
      // reads stall for a long stretch in the first groups to fill both banks
      out_ready = (rg < 2 && wg < 2) ? 1'b0 : ($urandom_range(3) != 0);
      in_valid  = (wg < NG) && ($urandom_range(4) != 0);
      in_data.re = 32'(wg);
      in_data.im = 32'(bitrev4(wp));
    end
    checks++;
    if (backpressure == 0) begin failures++; $display("FAIL: in_ready never dropped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
