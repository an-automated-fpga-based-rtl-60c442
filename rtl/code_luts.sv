// code_luts: position LUT and entry LUT of the parity-check matrix H.
//
// For every edge e = row*DC + k (the k-th non-zero of a row) it returns the
// column of that non-zero (position LUT), its GF(q) value (entry LUT), and the
// partner edge, i.e. the other non-zero of the same column (all columns have
// degree 2). The tables are built at elaboration from the formulas in
// nbldpc_pkg (h_col, h_entry): first half of the rows block-diagonal, second
// half an interleaved copy, entries alpha^((7e+1) mod (q-1)).
//
// Interface: purely combinational look-up, edge in, col/entry/partner out.
//
// The LUTs and their contents as code parameters (p and e) follow the paper;
// the particular matrix is this design's own, since the paper's code is not
// printed.
module code_luts
  import nbldpc_pkg::*;
#(
  parameter int unsigned N   = 192,
  parameter int unsigned M   = 96,
  parameter int unsigned DC  = 4,
  parameter int unsigned GFB = 5
) (
  input  logic [$clog2(M*DC)-1:0] edge_idx,
  output logic [$clog2(N)-1:0]    col,
  output logic [GFB-1:0]          entry,
  output logic [$clog2(M*DC)-1:0] partner
);

  localparam int unsigned E  = M * DC;
  localparam int unsigned EW = $clog2(E);
  localparam int unsigned CW = $clog2(N);

  typedef logic [CW-1:0]  col_tab_t   [E];
  typedef logic [GFB-1:0] entry_tab_t [E];
  typedef logic [EW-1:0]  part_tab_t  [E];

  function automatic col_tab_t build_col();
    col_tab_t t;
    for (int unsigned e = 0; e < E; e++) t[e] = CW'(h_col(e, M, DC, N));
    return t;
  endfunction

  function automatic entry_tab_t build_entry();
    entry_tab_t t;
    for (int unsigned e = 0; e < E; e++) t[e] = GFB'(h_entry(e, GFB));
    return t;
  endfunction

  // Partner edge: first and second edge of every column.
  function automatic part_tab_t build_partner();
    part_tab_t    t;
    int unsigned  first [N];
    logic         seen  [N];
    for (int unsigned c = 0; c < N; c++) begin
      seen[c]  = 1'b0;
      first[c] = 0;
    end
    for (int unsigned e = 0; e < E; e++) t[e] = EW'(e);
    for (int unsigned e = 0; e < E; e++) begin
      logic [CW-1:0] c;
      c = CW'(h_col(e, M, DC, N));
      if (!seen[c]) begin
        seen[c]  = 1'b1;
        first[c] = e;
      end else begin
        t[e]        = EW'(first[c]);
        t[first[c]] = EW'(e);
      end
    end
    return t;
  endfunction

  localparam col_tab_t   COL_LUT   = build_col();
  localparam entry_tab_t ENTRY_LUT = build_entry();
  localparam part_tab_t  PART_LUT  = build_partner();

  always_comb begin
    col     = COL_LUT[edge_idx];
    entry   = ENTRY_LUT[edge_idx];
    partner = PART_LUT[edge_idx];
  end

endmodule
