// gf16_mul_lambda: multiply a GF((2^2)^2) element by the constant lambda of
// P2(z) = z^2 + z + lambda.
//
// lambda is one of 8 .. 15 (the values for which P2 is irreducible) and phi one of 2, 3; both
// belong to the randomly chosen parameter set. For a fixed (phi, lambda) the product is a small
// XOR network; for phi = 2 and lambda = 12 it is
//   k3 = q2 ^ q0, k2 = q3 ^ q2 ^ q1 ^ q0, k1 = q3, k0 = q2,
// the published example. This block builds all 16 such constant networks from the field
// definition at elaboration and selects one by {phi_is3, lambda[2:0]}, so the datapath holds
// only XOR networks and a multiplexer, never a general multiplier. Combinational.
module gf16_mul_lambda
  import gf_pkg::*;
(
  input  gf16_t q,
  input  logic  phi_is3,
  input  gf16_t lambda,   // 8 .. 15; bit 3 is always set and is not used
  output gf16_t k
);
  gf16_t k_all [16];

  for (genvar g = 0; g < 16; g++) begin : g_const
    localparam gf4_t  PHI = g[3] ? 2'd3 : 2'd2;
    localparam gf16_t LAM = 4'(8 + (g % 8));
    // Each output bit is the XOR of the input bits selected by column j = q * 2^j.
    localparam gf16_t COL0 = f_gf16_mul(4'b0001, LAM, PHI);
    localparam gf16_t COL1 = f_gf16_mul(4'b0010, LAM, PHI);
    localparam gf16_t COL2 = f_gf16_mul(4'b0100, LAM, PHI);
    localparam gf16_t COL3 = f_gf16_mul(4'b1000, LAM, PHI);
    for (genvar i = 0; i < 4; i++) begin : g_bit
      assign k_all[g][i] = ^({COL3[i], COL2[i], COL1[i], COL0[i]} & q);
    end
  end

  assign k = k_all[{phi_is3, lambda[2:0]}];
endmodule
