// check_node: check-node processor built from four elementary check nodes.
//
// The d_c incoming variable-to-check LLRVs U[0..d_c-1] are first written
// into the CN RAM (d_c banks, one LLRV each). The forward-backward recursion
// over the d_c-stage trellis then runs on four ECNs:
//   forward  F[0] = U[0],      F[s] = ECN0(F[s-1], U[s]),   s = 1..d_c-2
//   backward B[d_c-1] = U[d_c-1], B[s] = ECN1(B[s+1], U[s]), s = d_c-2..1
//   merge    V[0] = B[1], V[d_c-1] = F[d_c-2],
//            V[k] = ECN2/ECN3(F[k-1], B[k+1]),             k = 1..d_c-2
// Forward and backward step together (ECN0 and ECN1 in parallel) and their
// results go to the FW and BW memories. The merges run on ECN2, which walks
// k = floor((d_c-1)/2) down to 1, and ECN3, which walks the next k up to
// d_c-2; each merge starts as soon as F[k-1] and B[k+1] are in the memories,
// so the merges begin when forward and backward meet in the middle of the
// trellis and overlap the remaining forward/backward steps. V[k] is the
// check-to-variable LLRV for edge k, still in the permuted domain.
//
// Interface: in_we/in_k/in_list write the CN RAM; `start` begins the
// recursion with the `mm` algorithm choice; `done` pulses when out_list[0..d_c-1]
// is valid, and it stays valid until the next start. Timing for d_c = 4:
// two ECN steps (each 2 + L_S-CN + n_m cycles plus skipped repeats, the
// merges running beside the second forward/backward step) plus about
// 4 cycles of hand-over.
//
// Follows the paper: four ECNs, FW/BW memories, CN RAM, the F/B/M steps and
// the merge start at the middle of the trellis. The paper also overlaps
// consecutive rows, which this single-path design does not. Requires DC >= 2.
module check_node #(
  parameter int unsigned GFB  = 5,
  parameter int unsigned Q    = 6,
  parameter int unsigned NM   = 8,
  parameter int unsigned DC   = 4,
  parameter int unsigned LSCN = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_we,
  input  logic [$clog2(DC)-1:0]            in_k,
  input  logic [NM-1:0][Q+GFB-1:0]         in_list,
  input  logic                             start,
  input  logic                             mm,
  output logic [DC-1:0][NM-1:0][Q+GFB-1:0] out_list,
  output logic                             busy,
  output logic                             done
);

  localparam int unsigned KW  = $clog2(DC);
  localparam int unsigned KLO = (DC - 1) / 2;   // first merge of ECN2; ECN3 starts at KLO+1
  typedef logic [NM-1:0][Q+GFB-1:0] llrv_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_t;
  state_t state;

  llrv_t cn_ram [DC];
  llrv_t fw_mem [DC];   // F[0..DC-2] used
  llrv_t bw_mem [DC];   // B[1..DC-1] used
  logic [DC-1:0] fw_ok, bw_ok;   // F[s] / B[s] present in the FW / BW memory

  logic         mm_q;
  logic [3:0]   e_start, e_busy, e_done;
  llrv_t        e_a [4];
  llrv_t        e_b [4];
  llrv_t        e_c [4];

  // forward/backward engine (ECN0, ECN1)
  logic [KW:0]  fb_step;       // step s in flight or next to launch
  logic         fb_run, fb_fin;
  logic [1:0]   fb_got;
  // merge engines (ECN2 walks k = KLO..1, ECN3 walks k = KLO+1..DC-2)
  logic [1:0][KW:0] m_k;
  logic [1:0]       m_run, m_fin, m_ready, m_launch;
  logic             fb_launch;

  for (genvar g = 0; g < 4; g++) begin : g_ecn
    ecn #(.GFB(GFB), .Q(Q), .NM(NM), .LSCN(LSCN)) u_ecn (
      .clk, .rst_n, .start(e_start[g]), .mm(mm_q), .a_list(e_a[g]), .b_list(e_b[g]),
      .c_list(e_c[g]), .busy(e_busy[g]), .done(e_done[g])
    );
  end

  logic [KW-1:0] fs, bs;
  always_comb begin
    fs        = KW'(fb_step);                 // F[fs] = F[fs-1] x U[fs]
    bs        = KW'(DC - 1 - 32'(fb_step));   // B[bs] = B[bs+1] x U[bs]
    fb_launch = (state == S_RUN) && !fb_run && !fb_fin;
    for (int m = 0; m < 2; m++) begin
      m_ready[m]  = fw_ok[KW'(m_k[m]) - 1'b1] && bw_ok[KW'(m_k[m]) + 1'b1];
      m_launch[m] = (state == S_RUN) && !m_run[m] && !m_fin[m] && m_ready[m];
    end
    e_a[0]  = fw_mem[fs - 1'b1];
    e_b[0]  = cn_ram[fs];
    e_a[1]  = bw_mem[bs + 1'b1];
    e_b[1]  = cn_ram[bs];
    e_a[2]  = fw_mem[KW'(m_k[0]) - 1'b1];
    e_b[2]  = bw_mem[KW'(m_k[0]) + 1'b1];
    e_a[3]  = fw_mem[KW'(m_k[1]) - 1'b1];
    e_b[3]  = bw_mem[KW'(m_k[1]) + 1'b1];
    e_start = {m_launch[1], m_launch[0], fb_launch, fb_launch};
  end

  always_ff @(posedge clk) begin
    if (in_we) cn_ram[in_k] <= in_list;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      fb_step  <= '0;
      fb_run   <= 1'b0;
      fb_fin   <= 1'b1;
      fb_got   <= '0;
      m_k      <= '0;
      m_run    <= '0;
      m_fin    <= '1;
      fw_ok    <= '0;
      bw_ok    <= '0;
      mm_q     <= 1'b0;
      done     <= 1'b0;
      out_list <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          mm_q         <= mm;
          fw_mem[0]    <= cn_ram[0];
          bw_mem[DC-1] <= cn_ram[DC-1];
          fw_ok        <= DC'(1);
          bw_ok        <= DC'(1) << (DC - 1);
          fb_step      <= (KW+1)'(1);
          fb_run       <= 1'b0;
          fb_fin       <= (DC <= 2);
          m_run        <= '0;
          m_k[0]       <= (KW+1)'(KLO);
          m_k[1]       <= (KW+1)'(KLO + 1);
          m_fin[0]     <= (KLO < 1);
          m_fin[1]     <= (KLO + 1 > DC - 2);
          state        <= S_RUN;
        end
        S_RUN: begin
          // forward / backward
          if (fb_launch) begin
            fb_run <= 1'b1;
            fb_got <= '0;
          end
          if (fb_run) begin
            if (e_done[0]) begin
              fw_mem[fs] <= e_c[0];
              fw_ok[fs]  <= 1'b1;
            end
            if (e_done[1]) begin
              bw_mem[bs] <= e_c[1];
              bw_ok[bs]  <= 1'b1;
            end
            fb_got <= fb_got | e_done[1:0];
            if ((fb_got | e_done[1:0]) == 2'b11) begin
              fb_run <= 1'b0;
              if (32'(fb_step) == DC - 2) fb_fin <= 1'b1;
              else fb_step <= fb_step + 1'b1;
            end
          end
          // merges, each as soon as F[k-1] and B[k+1] exist
          for (int m = 0; m < 2; m++) begin
            if (m_launch[m]) m_run[m] <= 1'b1;
            if (m_run[m] && e_done[2+m]) begin
              out_list[KW'(m_k[m])] <= e_c[2+m];
              m_run[m] <= 1'b0;
              if (m == 0) begin
                if (m_k[0] == (KW+1)'(1)) m_fin[0] <= 1'b1;
                else m_k[0] <= m_k[0] - 1'b1;
              end else begin
                if (32'(m_k[1]) == DC - 2) m_fin[1] <= 1'b1;
                else m_k[1] <= m_k[1] + 1'b1;
              end
            end
          end
          if (fb_fin && (&m_fin)) state <= S_OUT;
        end
        S_OUT: begin
          out_list[0]    <= (DC > 2) ? bw_mem[1] : cn_ram[DC-1];
          out_list[DC-1] <= (DC > 2) ? fw_mem[DC-2] : cn_ram[0];
          done           <= 1'b1;
          state          <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || (|e_busy);

endmodule
