// syndrome_unit -- syndrome of the received word, s_c = H * r^T.
//
// Combinational: the XOR of the columns of H selected by the ones of r. A
// zero syndrome means r is already a codeword. The function is the paper's
// (block H * y^T of the architecture); the AND-XOR tree is the plain way to
// build it. Interface: h_cols[j] is column j of H, r[j] is bit j of r.
module syndrome_unit #(
  parameter int unsigned N  = grand_mo_pkg::N_DEF,
  parameter int unsigned NK = grand_mo_pkg::NK_DEF
) (
  input  logic [N-1:0][NK-1:0] h_cols,
  input  logic [N-1:0]         r,
  output logic [NK-1:0]        s
);

  always_comb begin
    s = '0;
    for (int j = 0; j < N; j++)
      if (r[j]) s ^= h_cols[j];
  end

endmodule
