// revcomp: reverse complement of a packed base sequence ("Rev." in front of
// the second pair of hash units). Base i of the output is the complement of
// base NB-1-i of the input. With the code A=00 C=01 G=10 T=11 the complement
// of a base is its bitwise NOT. Purely combinational.
module revcomp
  import bancroft_pkg::*;
#(
  parameter int unsigned NB = K_BASES
) (
  input  logic [2*NB-1:0] in_seq,
  output logic [2*NB-1:0] out_seq
);
  always_comb begin
    for (int i = 0; i < NB; i++)
      out_seq[2*i +: 2] = base_comp(in_seq[2*(NB-1-i) +: 2]);
  end
endmodule
