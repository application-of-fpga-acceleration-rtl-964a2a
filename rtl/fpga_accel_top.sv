// fpga_accel_top: FPGA side of the PCIe spectrum-analysis accelerator.
//
// The host writes one or more groups of N 64-bit points into a read buffer
// in its memory; the DMA engine fetches them over PCIe, the spectrum-analysis
// unit (a pipelined N-point floating-point FFT) transforms them, and the
// engine writes the spectra to a write buffer in host memory, where the host
// program goes on to compute the ADC figures of merit. The PCIe core itself
// is not part of this RTL: its memory-request side appears here as the
// rd_req / rd_rsp / wr ports, and the control inputs (start, addresses,
// group count) are what the host would write into the core's registers.
// All of it runs in one clock domain (250 MHz in the reported system).
module fpga_accel_top
  import accel_pkg::*;
#(
  parameter int unsigned N             = 1024,
  parameter int unsigned ADDR_W        = 64,
  parameter int unsigned GROUPS_W      = 32,
  parameter int unsigned RD_FIFO_DEPTH = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [ADDR_W-1:0]   src_addr,
  input  logic [ADDR_W-1:0]   dst_addr,
  input  logic [GROUPS_W-1:0] n_groups,
  output logic                busy,
  output logic                done,
  output logic                rd_req_valid,
  input  logic                rd_req_ready,
  output logic [ADDR_W-1:0]   rd_req_addr,
  input  logic                rd_rsp_valid,
  input  logic [63:0]         rd_rsp_data,
  output logic                wr_valid,
  input  logic                wr_ready,
  output logic [ADDR_W-1:0]   wr_addr,
  output logic [63:0]         wr_data,
  // status: FFT pipeline stalled, padding clocked in to drain it, FFT
  // holding data, and the point on wr_* is the last one of its group
  output logic                fft_stall,
  output logic                fft_padding,
  output logic                fft_busy,
  output logic                result_last
);

  logic  fin_valid, fin_ready, fout_valid, fout_ready;
  cplx_t fin_data, fout_data;

  dma_engine #(
    .N(N), .ADDR_W(ADDR_W), .GROUPS_W(GROUPS_W), .RD_FIFO_DEPTH(RD_FIFO_DEPTH)
  ) u_dma (
    .clk, .rst_n,
    .start, .src_addr, .dst_addr, .n_groups, .busy, .done,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .fft_in_valid(fin_valid), .fft_in_ready(fin_ready), .fft_in_data(fin_data),
    .fft_out_valid(fout_valid), .fft_out_ready(fout_ready), .fft_out_data(fout_data)
  );

  fft_core #(.N(N)) u_fft (
    .clk, .rst_n,
    .in_valid(fin_valid), .in_ready(fin_ready), .in_data(fin_data),
    .out_valid(fout_valid), .out_ready(fout_ready), .out_data(fout_data),
    .out_last(result_last), .stall(fft_stall), .padding(fft_padding), .busy(fft_busy)
  );

endmodule
