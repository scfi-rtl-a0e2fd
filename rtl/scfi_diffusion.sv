// scfi_diffusion: diffusion layer of the hardened next-state function.
//
// K independent MDS multiplications D(L_i) = M * L_i, one mds_mult per 32-bit
// vector, as in the published structure. Only XOR gates (and the fixed alpha
// rewirings); combinational.
module scfi_diffusion #(
  parameter int unsigned K = 1
) (
  input  logic [K-1:0][31:0] l_i,
  output logic [K-1:0][31:0] d_o
);

  for (genvar i = 0; i < K; i++) begin : g_mds
    mds_mult u_mds (
      .l_i(l_i[i]),
      .d_o(d_o[i])
    );
  end

endmodule
