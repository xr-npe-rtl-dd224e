// xr_rmmec_cell: the 2-bit by 2-bit multiplier cell of the reconfigurable
// mantissa multiplier. Its four output bits are the minimised sum-of-products
// (Karnaugh map) expressions of the 2x2 product table, so the cell needs no
// adder. The paper states that the cell is K-map based; the equations below
// are the minimal forms of the product truth table. Combinational.
module xr_rmmec_cell (
  input  logic [1:0] a,
  input  logic [1:0] b,
  output logic [3:0] p
);
  always_comb begin
    p[0] = a[0] & b[0];
    p[1] = (a[1] & b[0]) ^ (a[0] & b[1]);
    p[2] = a[1] & b[1] & ~(a[0] & b[0]);
    p[3] = a[1] & b[1] & a[0] & b[0];
  end
endmodule
