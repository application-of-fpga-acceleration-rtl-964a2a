// dma_engine: moves groups of points between host memory and the FFT.
//
// The host program places its samples in a read buffer and gives the engine
// the buffer addresses and the number of groups; the engine then fetches
// n_groups * N points from src_addr, streams them into the spectrum-analysis
// unit and writes every result, in order, from dst_addr on. n_groups = 1 is
// the one-group-at-a-time use; larger values give the continuous stream in
// which several groups are in the FFT pipeline together.
//
// Host side, standing in for the memory-request side of the PCIe core:
//   read requests  rd_req_valid/rd_req_ready/rd_req_addr, one 64-bit point
//                  per request, byte address, 8 bytes per point;
//   read returns   rd_rsp_valid/rd_rsp_data, in request order, never stalled;
//   writes         wr_valid/wr_ready/wr_addr/wr_data, one point each.
// Read returns land in a RD_FIFO_DEPTH-entry FIFO; a request is issued only
// while outstanding requests plus FIFO contents leave room, so the FIFO never
// overflows whatever the read latency. Control: a start pulse while idle
// latches src_addr, dst_addr and n_groups; busy is high until the last result
// is written, and done pulses on the clock after that write. The request
// format, the FIFO and its depth are this design's choices.
module dma_engine
  import accel_pkg::*;
#(
  parameter int unsigned N             = 1024,
  parameter int unsigned ADDR_W        = 64,
  parameter int unsigned GROUPS_W      = 32,
  parameter int unsigned RD_FIFO_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [ADDR_W-1:0] src_addr,
  input  logic [ADDR_W-1:0] dst_addr,
  input  logic [GROUPS_W-1:0] n_groups,
  output logic              busy,
  output logic              done,
  // host read
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_rsp_valid,
  input  logic [63:0]       rd_rsp_data,
  // host write
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [63:0]       wr_data,
  // spectrum-analysis unit
  output logic              fft_in_valid,
  input  logic              fft_in_ready,
  output cplx_t             fft_in_data,
  input  logic              fft_out_valid,
  output logic              fft_out_ready,
  input  cplx_t             fft_out_data
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned PCW  = GROUPS_W + LOGN;         // point counters
  localparam int unsigned FCW  = $clog2(RD_FIFO_DEPTH + 1);

  logic [ADDR_W-1:0] src_q, dst_q;
  logic [PCW-1:0]    total, rd_cnt, wr_cnt;
  logic [FCW-1:0]    outstanding, fifo_count;
  logic [63:0]       fifo_head;
  logic              fifo_empty, fifo_pop, rd_fire, wr_fire;

  assign rd_req_valid = busy && (rd_cnt != total) &&
                        ((outstanding + fifo_count) < FCW'(RD_FIFO_DEPTH));
  assign rd_req_addr  = src_q + (ADDR_W'(rd_cnt) << 3);
  assign rd_fire      = rd_req_valid && rd_req_ready;

  stream_fifo #(.WIDTH(64), .DEPTH(RD_FIFO_DEPTH)) u_rd_fifo (
    .clk, .rst_n,
    .push(rd_rsp_valid), .push_data(rd_rsp_data),
    .pop(fifo_pop), .head(fifo_head), .empty(fifo_empty), .count(fifo_count)
  );

  assign fft_in_valid = !fifo_empty;
  assign fft_in_data  = fifo_head;
  assign fifo_pop     = fft_in_valid && fft_in_ready;

  assign wr_valid      = busy && fft_out_valid;
  assign wr_addr       = dst_q + (ADDR_W'(wr_cnt) << 3);
  assign wr_data       = fft_out_data;
  assign fft_out_ready = busy && wr_ready;
  assign wr_fire       = wr_valid && wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      src_q       <= '0;
      dst_q       <= '0;
      total       <= '0;
      rd_cnt      <= '0;
      wr_cnt      <= '0;
      outstanding <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && n_groups != 0) begin
          busy   <= 1'b1;
          src_q  <= src_addr;
          dst_q  <= dst_addr;
          total  <= PCW'(n_groups) << LOGN;
          rd_cnt <= '0;
          wr_cnt <= '0;
        end
      end else begin
        if (rd_fire) rd_cnt <= rd_cnt + 1'b1;
        if (wr_fire) begin
          wr_cnt <= wr_cnt + 1'b1;
          if (wr_cnt == total - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
      outstanding <= outstanding + FCW'(rd_fire) - FCW'(rd_rsp_valid);
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> outstanding != 0);

endmodule
