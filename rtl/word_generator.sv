// word_generator -- turns the bit indices of the found error pattern into the
// corrected word u_hat = r xor e.
//
// The controller hands over a list of up to m*l bit indices (each
// ceil(log2 n) bits wide) with a valid flag per entry; bit i of the error
// pattern e is set when some valid entry equals i. Combinational. The list
// format follows the (m x l) x ceil(log2 n) bus of the architecture figure;
// the compare-and-OR decoding of it is this design's choice.
module word_generator #(
  parameter int unsigned N    = grand_mo_pkg::N_DEF,
  parameter int unsigned NIND = grand_mo_pkg::MMAX * grand_mo_pkg::LMAX_DEF,
  localparam int unsigned IW  = $clog2(N)
) (
  input  logic [N-1:0]            r,
  input  logic [NIND-1:0][IW-1:0] ind,
  input  logic [NIND-1:0]         ind_valid,
  output logic [N-1:0]            e,
  output logic [N-1:0]            u_hat
);

  always_comb begin
    e = '0;
    for (int k = 0; k < NIND; k++)
      if (ind_valid[k] && int'(ind[k]) < int'(N)) e[ind[k]] = 1'b1;
    u_hat = r ^ e;
  end

endmodule
