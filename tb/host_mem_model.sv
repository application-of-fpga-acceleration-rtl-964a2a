// host_mem_model: behavioural model of the host side of the PCIe link, for
// simulation only (not synthesizable: it uses an associative array and
// random timing). It answers the DMA engine's one-point read requests, in
// order, after a random latency of 1 to MAX_LAT clocks, accepts requests and
// writes with a random ready (READY_PCT percent of clocks, 100 = always), and
// keeps the memory as 64-bit words indexed by byte address / 8. Words never
// written read as zero. Testbenches fill and inspect it through mem.
module host_mem_model #(
  parameter int MAX_LAT   = 8,
  parameter int READY_PCT = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [63:0] rd_req_addr,
  output logic        rd_rsp_valid,
  output logic [63:0] rd_rsp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [63:0] wr_addr,
  input  logic [63:0] wr_data
);

  logic [63:0] mem [longint];
  logic [63:0] rsp_q [$];
  longint      due_q [$];
  longint      now = 0;
  longint      last_due = 0;
  int          ready_pct = READY_PCT;

  function automatic logic [63:0] peek(input longint waddr);
    return mem.exists(waddr) ? mem[waddr] : 64'd0;
  endfunction

  always @(negedge clk) begin
    rd_req_ready <= ($urandom_range(99) < ready_pct);
    wr_ready     <= ($urandom_range(99) < ready_pct);
  end

  always @(posedge clk) begin
    now <= now + 1;
    rd_rsp_valid <= 1'b0;
    if (rst_n) begin
      if (rd_req_valid && rd_req_ready) begin
        automatic longint due = now + 1 + longint'($urandom_range(MAX_LAT - 1));
        if (due <= last_due) due = last_due + 1;   // returns stay in order
        last_due = due;
        rsp_q.push_back(peek(longint'(rd_req_addr >> 3)));
        due_q.push_back(due);
      end
      if (due_q.size() != 0 && due_q[0] <= now) begin
        rd_rsp_valid <= 1'b1;
        rd_rsp_data  <= rsp_q.pop_front();
        void'(due_q.pop_front());
      end
      if (wr_valid && wr_ready) mem[longint'(wr_addr >> 3)] = wr_data;
    end
  end

  initial begin
    rd_req_ready = 1'b0;
    wr_ready     = 1'b0;
    rd_rsp_valid = 1'b0;
    rd_rsp_data  = '0;
  end

endmodule
