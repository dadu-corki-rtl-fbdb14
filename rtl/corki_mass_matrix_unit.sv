// corki_mass_matrix_unit: task-space mass matrix Mx = (J M^-1 J^T)^-1.
//
// Reuses the link poses and the Jacobian from the pose unit instead of
// recomputing kinematics. Four phases, all sequential on one register array
// A (7 rows x 14 columns):
//  1. Joint-space mass matrix of the point-mass model,
//     M = diag(armature) + sum_i m_i Jv_i^T Jv_i, where column j of Jv_i is
//     z_j x (p_{i+1} - p_j) for j <= i. Per link: one cycle forms the columns,
//     then one cycle per row j <= i adds m_i (c_j . c_k) for all k.
//  2. Gauss-Jordan inversion of [M | I] without pivoting (M is symmetric
//     positive definite): per pivot one division (48 cycles), one scaling
//     cycle, one cycle per eliminated row.
//  3. J M^-1 (3x7), one column per cycle, then Linv = (J M^-1) J^T in one.
//  4. The same Gauss-Jordan engine inverts the 3x3 Linv, giving Mx.
// `start` begins; `done` pulses when `mx` and `jminv` are valid; both hold
// until the next start, which is what the approximate mode reuses.
// The paper names the unit, its inputs (poses and Jacobian) and its gear
// (reuse); the inertial model and all of the arithmetic above are this
// design's own.
module corki_mass_matrix_unit
  import corki_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  vec3_t  z_tab [NJ],
  input  vec3_t  p_tab [NJ+1],
  input  jmat_t  jac,
  input  jtmat_t jac_t,
  output mat3_t  mx,
  output jmat_t  jminv,
  output logic   done,
  output logic   busy
);
  localparam int unsigned NC = 2 * NJ;
  localparam fx_t ONE = to_fx(1.0);

  typedef enum logic [3:0] {S_IDLE, S_COL, S_ACC, S_DIV, S_DWAIT, S_SCALE, S_ELIM,
                            S_JM, S_LI, S_OUT} state_e;
  state_e st;

  fx_t        A [NJ][NC];
  vec3_t      c [NJ];
  lidx_t      i, j, piv, r;
  lidx_t      nsz;          // size of the system being inverted minus 1
  logic       phase3;       // second inversion (3x3) in progress
  fx_t        recip;

  logic dv_start, dv_busy, dv_done;
  fx_t  dv_q;
  corki_div u_div (.clk, .rst_n, .start(dv_start), .a(ONE), .b(A[piv][piv]),
                   .busy(dv_busy), .done(dv_done), .q(dv_q));
  assign dv_start = (st == S_DIV);
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; i <= '0; j <= '0; piv <= '0; r <= '0; nsz <= '0; phase3 <= 1'b0;
      recip <= '0; done <= 1'b0; mx <= '0; jminv <= '0;
      for (int a = 0; a < NJ; a++) begin
        c[a] <= '0;
        for (int b = 0; b < NC; b++) A[a][b] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int a = 0; a < NJ; a++)
            for (int b = 0; b < NC; b++)
              A[a][b] <= (b == a) ? ARMATURE : (b == a + NJ) ? ONE : '0;
          i <= '0; phase3 <= 1'b0; nsz <= lidx_t'(NJ - 1);
          st <= S_COL;
        end
        // Phase 1: columns of the Jacobian of link i's mass point
        S_COL: begin
          for (int a = 0; a < NJ; a++)
            c[a] <= (lidx_t'(a) <= i) ? v_cross(z_tab[a], v_sub(p_tab[i + 3'd1], p_tab[a])) : '0;
          j  <= '0;
          st <= S_ACC;
        end
        S_ACC: begin
          for (int b = 0; b < NJ; b++)
            A[j][b] <= A[j][b] + fx_mul(LINK_MASS[i], v_dot(c[j], c[b]));
          j <= j + 1'b1;
          if (j == i) begin
            i <= i + 1'b1;
            if (i == lidx_t'(NJ - 1)) begin piv <= '0; st <= S_DIV; end
            else st <= S_COL;
          end
        end
        // Phases 2 and 4: Gauss-Jordan elimination
        S_DIV:   st <= S_DWAIT;
        S_DWAIT: if (dv_done) begin recip <= dv_q; st <= S_SCALE; end
        S_SCALE: begin
          for (int b = 0; b < NC; b++) A[piv][b] <= fx_mul(A[piv][b], recip);
          r  <= '0;
          st <= S_ELIM;
        end
        S_ELIM: begin
          if (r != piv)
            for (int b = 0; b < NC; b++) A[r][b] <= A[r][b] - fx_mul(A[r][piv], A[piv][b]);
          r <= r + 1'b1;
          if (r == nsz) begin
            if (piv == nsz) begin
              if (phase3) st <= S_OUT;
              else begin j <= '0; st <= S_JM; end
            end else begin
              piv <= piv + 1'b1;
              st  <= S_DIV;
            end
          end
        end
        // Phase 3: J M^-1, column j per cycle, then Linv into A for phase 4
        S_JM: begin
          for (int d = 0; d < ND; d++) begin
            fx_t s;
            s = '0;
            for (int a = 0; a < NJ; a++) s += fx_mul(jac[d][a], A[a][NJ + j]);
            jminv[d][j] <= s;
          end
          j <= j + 1'b1;
          if (j == lidx_t'(NJ - 1)) st <= S_LI;
        end
        S_LI: begin
          for (int d = 0; d < NJ; d++)
            for (int e = 0; e < NC; e++) begin
              fx_t s;
              s = '0;
              if (d < ND && e < ND)
                for (int a = 0; a < NJ; a++) s += fx_mul(jminv[d][a], v_get(jac_t[a], e));
              A[d][e] <= (d < ND && e < ND) ? s :
                         (d < ND && e == d + NJ) ? ONE : '0;
            end
          phase3 <= 1'b1; nsz <= lidx_t'(ND - 1); piv <= '0;
          st <= S_DIV;
        end
        S_OUT: begin
          for (int d = 0; d < ND; d++)
            mx[d] <= '{x: A[d][NJ], y: A[d][NJ + 1], z: A[d][NJ + 2]};
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
