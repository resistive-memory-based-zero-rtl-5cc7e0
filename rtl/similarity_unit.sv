// similarity_unit: accumulates the three sums that make up the cosine
// similarity s = a.b / (|a| |b|) of two embeddings streamed element by
// element: dot = sum a*b, na = sum a^2, nb = sum b^2.
//
// clr zeroes the sums at the next edge; en adds one element pair (a, b) at
// the next edge. clr wins over en. The sums are registered outputs. With
// 16-bit elements and 64 dimensions no sum exceeds 38 bits, so a 40-bit
// accumulator never overflows. The division and square root are left to the
// user of the sums, because an argmax over cosines needs neither.
module similarity_unit
  import lsm_pkg::*;
#(
  parameter int ZW = Z_W,
  parameter int AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 en,
  input  logic signed [ZW-1:0] a,
  input  logic signed [ZW-1:0] b,
  output logic signed [AW-1:0] dot,
  output logic [AW-1:0]        na,
  output logic [AW-1:0]        nb
);

  logic signed [2*ZW-1:0] ab, aa, bb;
  assign ab = a * b;
  assign aa = a * a;
  assign bb = b * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dot <= '0;
      na  <= '0;
      nb  <= '0;
    end else if (clr) begin
      dot <= '0;
      na  <= '0;
      nb  <= '0;
    end else if (en) begin
      dot <= dot + AW'(ab);
      na  <= na + AW'(unsigned'(aa));
      nb  <= nb + AW'(unsigned'(bb));
    end
  end

endmodule
