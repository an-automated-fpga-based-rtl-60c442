// perm_unit: GF permutation (Perm) and inverse permutation (Perm^-1) of an LLRV.
//
// On the way from a variable node to a check node every symbol beta of the
// message is replaced by h*beta, where h is the H-matrix entry of the edge; on
// the way back it is replaced by beta/h. Costs are unchanged, and because
// multiplication by h != 0 is a bijection, the order of the list is kept.
// The products come from a q x q table (flattened, index {h, beta}) and the inverse from a q-entry table,
// both built at elaboration from the field's primitive polynomial (the
// Perm/Perm^-1 LUT).
//
// Interface: combinational; inverse = 0 multiplies, inverse = 1 divides.
//
// The role of the unit follows the paper; the table form and the
// all-entries-at-once evaluation are this design's choices.
module perm_unit
  import nbldpc_pkg::*;
#(
  parameter int unsigned QQ  = 32,
  parameter int unsigned GFB = 5,
  parameter int unsigned Q   = 6,
  parameter int unsigned NM  = 8
) (
  input  logic                     inverse,
  input  logic [GFB-1:0]           h,
  input  logic [NM-1:0][Q+GFB-1:0] in_list,
  output logic [NM-1:0][Q+GFB-1:0] out_list
);

  typedef logic [GFB-1:0] mul_tab_t [QQ*QQ];
  typedef logic [GFB-1:0] inv_tab_t [QQ];

  function automatic mul_tab_t build_mul();
    mul_tab_t t;
    for (int unsigned a = 0; a < QQ; a++)
      for (int unsigned b = 0; b < QQ; b++)
        t[a*QQ+b] = GFB'(gf_mul(GF_MAXB'(a), GF_MAXB'(b), GFB));
    return t;
  endfunction

  function automatic inv_tab_t build_inv();
    inv_tab_t t;
    for (int unsigned a = 0; a < QQ; a++) t[a] = GFB'(gf_inv(GF_MAXB'(a), GFB));
    return t;
  endfunction

  localparam mul_tab_t MUL_LUT = build_mul();
  localparam inv_tab_t INV_LUT = build_inv();

  logic [GFB-1:0] factor;

  always_comb begin
    factor = inverse ? INV_LUT[h] : h;
    for (int unsigned i = 0; i < NM; i++)
      out_list[i] = {in_list[i][Q+GFB-1:GFB], MUL_LUT[{factor, in_list[i][GFB-1:0]}]};
  end

endmodule
