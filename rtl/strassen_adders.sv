// strassen_adders: the tile adders that finish a Strassen block product.
//
// Seven IMAs compute, element by element, the products
//   P0 = W00(X01-X11)  P1 = (W00+W01)X11  P2 = (W10+W11)X00  P3 = W11(X10-X00)
//   P4 = (W00+W11)(X00+X11)  P5 = (W01-W11)(X10+X11)  P6 = (W00-W10)(X00+X01)
// (the weight sums are programmed into the crossbars ahead of time) and this
// unit forms the four output blocks
//   Y00 = P4 + P3 - P1 + P5   Y01 = P0 + P1   Y10 = P2 + P3   Y11 = P0 + P4 - P2 - P6.
// It also offers the seven input combinations of the X blocks (pre-adders).
// Everything is combinational and signed; outputs are two bits wider than
// the inputs so no sum can overflow. The equations follow the paper.
module strassen_adders #(
  parameter int unsigned PW = 17,   // width of a signed P element
  parameter int unsigned XW = 17    // width of a signed X element
) (
  input  logic signed [PW-1:0] p   [7],
  output logic signed [PW+1:0] y00,
  output logic signed [PW+1:0] y01,
  output logic signed [PW+1:0] y10,
  output logic signed [PW+1:0] y11,
  input  logic signed [XW-1:0] x00,
  input  logic signed [XW-1:0] x01,
  input  logic signed [XW-1:0] x10,
  input  logic signed [XW-1:0] x11,
  output logic signed [XW:0]   xc  [7]   // X operand of P0..P6
);
  always_comb begin
    y00 = (PW+2)'(p[4]) + (PW+2)'(p[3]) - (PW+2)'(p[1]) + (PW+2)'(p[5]);
    y01 = (PW+2)'(p[0]) + (PW+2)'(p[1]);
    y10 = (PW+2)'(p[2]) + (PW+2)'(p[3]);
    y11 = (PW+2)'(p[0]) + (PW+2)'(p[4]) - (PW+2)'(p[2]) - (PW+2)'(p[6]);
    xc[0] = (XW+1)'(x01) - (XW+1)'(x11);
    xc[1] = (XW+1)'(x11);
    xc[2] = (XW+1)'(x00);
    xc[3] = (XW+1)'(x10) - (XW+1)'(x00);
    xc[4] = (XW+1)'(x00) + (XW+1)'(x11);
    xc[5] = (XW+1)'(x10) + (XW+1)'(x11);
    xc[6] = (XW+1)'(x00) + (XW+1)'(x01);
  end
endmodule
