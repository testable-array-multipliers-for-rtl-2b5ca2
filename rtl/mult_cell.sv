// Array multiplier cell: an AND gate and a full adder.
//
// The partial product bit xi & yi is added to the column-chain input pi (the
// partial product arriving from the row above) and the row-chain carry ci
// (from the right-hand neighbour). po is the sum, going down the column chain,
// and co the carry, going left along the row chain. xi leaves unchanged on xo
// to the left neighbour and yi on yo to the cell below, as in the cell drawing
// of the paper. The full adder's A input is the AND output and its B input is
// pi; that assignment is this design's choice. Purely combinational.
module mult_cell (
  input  logic xi,
  input  logic yi,
  input  logic ci,
  input  logic pi,
  output logic xo,
  output logic yo,
  output logic co,
  output logic po
);
  logic xy;

  assign xy = xi & yi;
  assign xo = xi;
  assign yo = yi;

  full_adder u_fa (
    .a   (xy),
    .b   (pi),
    .cin (ci),
    .s   (po),
    .cout(co)
  );
endmodule
