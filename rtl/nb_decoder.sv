// nb_decoder: row-by-row EMS / min-max decoder of a regular (2, d_c)
// nonbinary LDPC code (the DD state of the emulator, without the decision).
//
// Every iteration processes the M rows of H in order. For row r and its d_c
// edges e = r*d_c + k:
//   1. gather: the variable-to-check LLRV of each edge is read - in the first
//      iteration the prior of the edge's column (position LUT) is read from the
//      prior memory and permuted by the edge's H entry (entry LUT); later the
//      already permuted LLRV is read from the v-c memory - and written into
//      bank k of the check node's CN RAM;
//   2. check node: forward-backward recursion (check_node);
//   3. scatter, per edge: the c-v LLRV is inverse-permuted and stored in the
//      c-v memory. The column's other edge p (the partner, in another row)
//      gets a new v-c LLRV: VN(prior, c-v of e), permuted by the entry of p and
//      written to the v-c memory at p. If p already holds a c-v LLRV in this
//      frame, the posterior VN(new v-c, c-v of p) is formed and its most likely
//      symbol is written to the posterior memory; otherwise the new v-c itself
//      serves as posterior.
// After the last row of the last iteration the posterior memory holds the
// hard decision of every column.
//
// Memories (one LLRV per word, registered reads): v-c memory and c-v memory
// with M*d_c words each, posterior memory with N symbols; prior memory is
// outside (prior_addr -> prior_list, 1-cycle latency).
//
// Interface: `start` (with iter_limit L >= 1 and mm) begins a frame and clears
// the c-v valid flags; `done` pulses after the last row of iteration L.
// post_addr -> post_sym reads the decisions (1-cycle latency).
//
// The scatter of step 3 runs on d_c VN lanes, one vn_unit and one output
// permutation unit per edge of the row: edge k's lane is started 2 cycles
// after edge k-1's, performs the v-c update and then, if needed, the
// posterior, and writes its own results. The edges of a row belong to
// different columns, so the lanes never touch the same words and the result
// equals a one-edge-at-a-time scatter. Timing per row: 2*d_c gather cycles,
// one check-node run, 2*d_c issue cycles, then the last lane's one or two VN
// runs (3 + n_m cycles each) and 2 cycles of hand-over: about 82 cycles at
// the defaults.
//
// Follows the paper: dataflow of steps (1)-(5), v-c/c-v/posterior memories,
// priors used as v-c messages in iteration 1, position/entry LUTs, the
// permutation units and the VN RAM based VN. This design's own choices: the
// degree-2 columns (v-c for the partner edge = prior + fresh c-v), a single
// processing path without the paper's interleaving of two rows (the next
// row waits until every VN lane is idle), no early
// stopping, and posterior = best symbol only.
module nb_decoder #(
  parameter int unsigned QQ   = 32,
  parameter int unsigned GFB  = 5,
  parameter int unsigned Q    = 6,
  parameter int unsigned NM   = 8,
  parameter int unsigned N    = 192,
  parameter int unsigned M    = 96,
  parameter int unsigned DC   = 4,
  parameter int unsigned LSCN = 8,
  parameter int unsigned LSVN = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [7:0]                iter_limit,
  input  logic                      mm,
  output logic [$clog2(N)-1:0]      prior_addr,
  input  logic [NM-1:0][Q+GFB-1:0]  prior_list,
  input  logic [$clog2(N)-1:0]      post_addr,
  output logic [GFB-1:0]            post_sym,
  output logic                      busy,
  output logic                      done,
  output logic [7:0]                iter,
  output logic                      post_from_partner   // posterior used a stored partner c-v
);

  localparam int unsigned E  = M * DC;
  localparam int unsigned EW = $clog2(E);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned RW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned KW = $clog2(DC);
  typedef logic [NM-1:0][Q+GFB-1:0] llrv_t;

  typedef enum logic [3:0] {
    S_IDLE, S_G_ADDR, S_G_DATA, S_CN_GO, S_CN_WAIT,
    S_V_ADDR, S_V_DATA, S_V_WAIT, S_NEXT
  } state_t;
  state_t state;

  logic [RW-1:0] row;
  logic [KW-1:0] k;
  logic [7:0]    limit_q;
  logic          mm_q;
  logic [EW-1:0] edge_idx, partner;
  logic [CW-1:0] col, col_p;
  logic [GFB-1:0] h_e, h_p;

  // memories
  llrv_t          vc_mem [E];
  llrv_t          cv_mem [E];
  logic [E-1:0]   cv_valid;
  logic [GFB-1:0] post_mem [N];
  llrv_t          vc_rd, cv_rd;

  // one VN lane per edge of the row: 0 idle, 1 v-c update, 2 posterior
  logic [DC-1:0][1:0]     ln_stage;
  logic [DC-1:0][CW-1:0]  ln_col;
  logic [DC-1:0][EW-1:0]  ln_partner;
  logic [DC-1:0][GFB-1:0] ln_hp;
  logic [DC-1:0]          ln_cvp_valid;
  llrv_t                  ln_cvp_q [DC];   // c-v LLRV of the partner edge

  assign edge_idx = EW'(row * DC + k);

  code_luts #(.N(N), .M(M), .DC(DC), .GFB(GFB)) u_lut_e (
    .edge_idx(edge_idx), .col(col), .entry(h_e), .partner(partner)
  );
  logic [EW-1:0] partner_back;
  code_luts #(.N(N), .M(M), .DC(DC), .GFB(GFB)) u_lut_p (
    .edge_idx(partner), .col(col_p), .entry(h_p), .partner(partner_back)
  );

  // permutation units
  llrv_t prior_perm, cv_inv;
  llrv_t cn_out [DC];
  logic [DC-1:0][NM-1:0][Q+GFB-1:0] cn_out_flat;
  always_comb for (int unsigned i = 0; i < DC; i++) cn_out[i] = cn_out_flat[i];

  perm_unit #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM)) u_perm_in (
    .inverse(1'b0), .h(h_e), .in_list(prior_list), .out_list(prior_perm)
  );
  perm_unit #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM)) u_perm_inv (
    .inverse(1'b1), .h(h_e), .in_list(cn_out[k]), .out_list(cv_inv)
  );

  // check node
  logic  cn_we, cn_start, cn_busy, cn_done;
  llrv_t cn_in;
  assign cn_in    = (iter == 8'd0) ? prior_perm : vc_rd;
  assign cn_we    = (state == S_G_DATA);
  assign cn_start = (state == S_CN_GO);

  check_node #(.GFB(GFB), .Q(Q), .NM(NM), .DC(DC), .LSCN(LSCN)) u_cn (
    .clk, .rst_n, .in_we(cn_we), .in_k(k), .in_list(cn_in), .start(cn_start), .mm(mm_q),
    .out_list(cn_out_flat), .busy(cn_busy), .done(cn_done)
  );

  // variable-node lanes
  logic [DC-1:0] vn_start, vn_busy, vn_done;
  llrv_t         vn_p [DC];
  llrv_t         vn_c [DC];
  llrv_t         vn_out [DC];
  llrv_t         vn_perm [DC];
  always_comb begin
    for (int unsigned j = 0; j < DC; j++) begin
      vn_start[j] = (state == S_V_DATA && 32'(k) == j) ||
                    (ln_stage[j] == 2'd1 && vn_done[j] && ln_cvp_valid[j]);
      vn_p[j]     = (ln_stage[j] == 2'd1) ? vn_out[j] : prior_list;
      vn_c[j]     = (ln_stage[j] == 2'd1) ? ln_cvp_q[j] : cv_inv;
    end
  end

  for (genvar g = 0; g < DC; g++) begin : g_lane
    vn_unit #(.GFB(GFB), .Q(Q), .NM(NM), .LSVN(LSVN)) u_vn (
      .clk, .rst_n, .start(vn_start[g]), .p_list(vn_p[g]), .c_list(vn_c[g]), .o_list(vn_out[g]),
      .busy(vn_busy[g]), .done(vn_done[g])
    );
    perm_unit #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM)) u_perm_out (
      .inverse(1'b0), .h(ln_hp[g]), .in_list(vn_out[g]), .out_list(vn_perm[g])
    );
  end

  // prior memory address: column of the current edge
  assign prior_addr = col;

  // memory ports
  always_ff @(posedge clk) begin
    vc_rd    <= vc_mem[edge_idx];
    cv_rd    <= cv_mem[partner];
    post_sym <= post_mem[post_addr];
    if (state == S_V_DATA) cv_mem[edge_idx] <= cv_inv;
    for (int unsigned j = 0; j < DC; j++) begin
      if (ln_stage[j] == 2'd1 && vn_done[j]) vc_mem[ln_partner[j]] <= vn_perm[j];
      if (vn_done[j] && (ln_stage[j] == 2'd2 || (ln_stage[j] == 2'd1 && !ln_cvp_valid[j])))
        post_mem[ln_col[j]] <= vn_out[j][0][GFB-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state             <= S_IDLE;
      row               <= '0;
      k                 <= '0;
      iter              <= '0;
      limit_q           <= 8'd1;
      mm_q              <= 1'b0;
      cv_valid          <= '0;
      ln_stage          <= '0;
      ln_col            <= '0;
      ln_partner        <= '0;
      ln_hp             <= '0;
      ln_cvp_valid      <= '0;
      done              <= 1'b0;
      post_from_partner <= 1'b0;
    end else begin
      done              <= 1'b0;
      post_from_partner <= 1'b0;
      // lanes: v-c update, then the posterior if the partner c-v exists
      for (int unsigned j = 0; j < DC; j++) begin
        if (vn_done[j]) begin
          if (ln_stage[j] == 2'd1 && ln_cvp_valid[j]) begin
            ln_stage[j]       <= 2'd2;
            post_from_partner <= 1'b1;
          end else begin
            ln_stage[j] <= 2'd0;
          end
        end
      end
      case (state)
        S_IDLE: if (start) begin
          limit_q  <= (iter_limit == 8'd0) ? 8'd1 : iter_limit;
          mm_q     <= mm;
          iter     <= '0;
          row      <= '0;
          k        <= '0;
          cv_valid <= '0;
          state    <= S_G_ADDR;
        end
        // gather the d_c v-c LLRVs of the row into the CN RAM
        S_G_ADDR: state <= S_G_DATA;
        S_G_DATA: begin
          if (32'(k) == DC - 1) begin
            k     <= '0;
            state <= S_CN_GO;
          end else begin
            k     <= k + 1'b1;
            state <= S_G_ADDR;
          end
        end
        S_CN_GO:   state <= S_CN_WAIT;
        S_CN_WAIT: if (cn_done) state <= S_V_ADDR;
        // scatter: c-v memory, VN, v-c memory, posterior
        S_V_ADDR:  state <= S_V_DATA;
        S_V_DATA: begin
          cv_valid[edge_idx] <= 1'b1;
          ln_stage[k]        <= 2'd1;
          ln_col[k]          <= col;
          ln_partner[k]      <= partner;
          ln_hp[k]           <= h_p;
          ln_cvp_valid[k]    <= cv_valid[partner];
          ln_cvp_q[k]        <= cv_rd;
          if (32'(k) == DC - 1) begin
            k     <= '0;
            state <= S_V_WAIT;
          end else begin
            k     <= k + 1'b1;
            state <= S_V_ADDR;
          end
        end
        S_V_WAIT: if (ln_stage == '0) state <= S_NEXT;
        S_NEXT: begin
          if (32'(row) != M - 1) begin
            row   <= row + 1'b1;
            state <= S_G_ADDR;
          end else begin
            row <= '0;
            if (iter + 1'b1 == limit_q) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              iter  <= iter + 1'b1;
              state <= S_G_ADDR;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || cn_busy || (|vn_busy);

  // The code tables must pair edges within one column.
  always_ff @(posedge clk) begin
    if (rst_n && state != S_IDLE) begin
      assert (col_p == col && partner_back == edge_idx)
        else $error("nb_decoder: partner edge %0d of edge %0d is not in the same column", partner, edge_idx);
    end
  end

endmodule
