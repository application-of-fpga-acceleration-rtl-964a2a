// stream_fifo: synchronous first-in first-out buffer of DEPTH words with a
// push / pop interface and an occupancy count. A push while full or a pop
// while empty is a caller error and is flagged by an assertion. Reads are
// combinational from the head entry (first-word fall-through).
module stream_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         push_data,
  input  logic                     pop,
  output logic [WIDTH-1:0]         head,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;

  assign head  = mem[rp];
  assign empty = (count == 0);

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (count < ($clog2(DEPTH+1))'(DEPTH) || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
