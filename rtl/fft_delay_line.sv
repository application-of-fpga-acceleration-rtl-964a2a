// fft_delay_line: DEPTH-step delay of a WIDTH-bit word, advanced by a clock
// enable. Each enabled clock reads the oldest word and overwrites it with the
// newest, so dout is din from DEPTH enabled clocks earlier. Built as a memory
// with one circular pointer (one read and one write per step); this is the
// feedback buffer of a single-path delay-feedback FFT stage. The memory has
// no reset: what it holds before DEPTH words have been written is only ever
// passed on marked invalid by the stage around it.
module fft_delay_line #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    ptr;

  assign dout = mem[ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (ce) begin
      ptr <= (ptr == PW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ce) mem[ptr] <= din;
  end

endmodule
