// delay_line: a D-cycle delay of a W-bit word, advancing only on cycles with en high.
//
// Built as a circular buffer of D words: each enabled cycle the word at the pointer is
// read out (written D enabled cycles earlier) and overwritten with din, and the pointer
// steps on. D = 1 is a single register. The buffer contents are not reset (they are
// data, flushed by the first D enabled cycles); only the pointer is. D must be a power
// of two, which every delay in the cascade is. This is one of the "D" delay elements
// drawn inside a DSD unit; the circular-buffer form is this design's choice.
module delay_line #(
  parameter int W = 48,
  parameter int D = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  initial assert (D >= 1 && (D & (D - 1)) == 0) else $fatal(1, "delay_line: D must be a power of two");

  if (D == 1) begin : g_reg
    logic [W-1:0] r;
    always_ff @(posedge clk) if (en) r <= din;
    assign dout = r;
  end else begin : g_ram
    localparam int AW = $clog2(D);
    logic [W-1:0]  mem [D];
    logic [AW-1:0] ptr;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)  ptr <= '0;
      else if (en) ptr <= ptr + 1'b1;
    always_ff @(posedge clk) if (en) mem[ptr] <= din;
    assign dout = mem[ptr];
  end

endmodule
