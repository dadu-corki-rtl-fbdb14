// corki_pose_unit: forward kinematics, end-effector position and Jacobian.
//
// First stage of the dataflow accelerator. For joint i = 1..7 and then the
// flange it applies one modified-DH step: R' = R_{i-1} RotX(alpha_{i-1})
// (a signed column permutation), p_i = p_{i-1} + a_{i-1} R_{i-1}e1 + d_i R'e3,
// R_i = R' RotZ(theta_i), with sin/cos from a CORDIC (ITER+1 cycles per
// joint). As soon as p_{i+1} is known, the record of link i (joint axis z_i,
// link vector r_i = p_{i+1} - p_i) is pushed into the FIFO towards the
// velocity unit, so the later units start on link 1 while link 2 is still
// being computed. After the flange, the 3x7 linear Jacobian of the flange
// point, column j = z_j x (x - p_j), is formed one column per cycle and kept
// twice: as J (row-major, for J M^-1) and as J^T (column records, for the
// torque mapping), as the paper keeps a separate copy of the transpose.
// With `full` low (approximate mode chosen by the ACE unit) nothing is
// recomputed: the stored link table is replayed into the FIFO, one record
// per cycle, and x, J, J^T keep their previous values.
// Interface: `start` with `full`; records on rec_valid/rec_ready; `done`
// pulses when all seven records are out and J is ready.
module corki_pose_unit
  import corki_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic      full,
  input  jvec_t     theta,
  output logic      rec_valid,
  input  logic      rec_ready,
  output pose_rec_t rec,
  output logic      done,
  output vec3_t     x,            // end-effector (flange) position
  output jmat_t     jac,          // J[d][j]
  output jtmat_t    jac_t,        // J^T[j]
  output vec3_t     z_tab [NJ],   // joint axes
  output vec3_t     p_tab [NJ+1]  // frame origins p_1..p_7, flange
);
  typedef enum logic [2:0] {S_IDLE, S_TRIG, S_WAIT, S_UPD, S_EMIT, S_JAC, S_REPLAY} state_e;
  state_e st;

  logic [2:0] i;          // DH row being processed 0..7 (7 = flange)
  lidx_t      k;          // replay / jacobian index
  vec3_t      c1, c2, c3; // columns of R_{i-1}
  vec3_t      r_tab [NJ];

  logic cs_start, cs_done, cs_busy;
  fx_t  cs_cos, cs_sin;
  corki_cordic u_cordic (.clk, .rst_n, .start(cs_start), .theta(theta[i]),
                         .busy(cs_busy), .done(cs_done), .cos_o(cs_cos), .sin_o(cs_sin));
  assign cs_start = (st == S_TRIG) && (i != 3'(NJ));

  // one DH step, combinational
  vec3_t c2p, c3p, pn, n1, n2;
  fx_t   cth, sth;
  always_comb begin
    cth = (i != 3'(NJ)) ? cs_cos : to_fx(1.0);
    sth = (i != 3'(NJ)) ? cs_sin : '0;
    unique case (DH_ALPHA[i])
      ALPHA_P90: begin c2p = c3;        c3p = v_neg(c2); end
      ALPHA_M90: begin c2p = v_neg(c3); c3p = c2;        end
      default:   begin c2p = c2;        c3p = c3;        end
    endcase
    pn = v_add(v_add((i == 0) ? '0 : p_tab[i - 3'd1], v_scale(DH_A[i], c1)),
               v_scale(DH_D[i], c3p));
    n1 = v_add(v_scale(cth, c1), v_scale(sth, c2p));
    n2 = v_sub(v_scale(cth, c2p), v_scale(sth, c1));
  end

  assign rec_valid = (st == S_EMIT) || (st == S_REPLAY);
  always_comb begin
    if (st == S_REPLAY) rec = '{idx: k, z: z_tab[k], r: r_tab[k]};
    else                rec = '{idx: i - 3'd1, z: z_tab[i - 3'd1], r: r_tab[i - 3'd1]};
  end

  assign x = p_tab[NJ];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; i <= '0; k <= '0; done <= 1'b0;
      c1 <= '0; c2 <= '0; c3 <= '0;
      jac <= '0; jac_t <= '0;
      for (int j = 0; j < NJ; j++) begin z_tab[j] <= '0; r_tab[j] <= '0; end
      for (int j = 0; j <= NJ; j++) p_tab[j] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          k <= '0;
          if (full) begin
            i  <= '0;
            c1 <= '{x: to_fx(1.0), y: '0, z: '0};
            c2 <= '{x: '0, y: to_fx(1.0), z: '0};
            c3 <= '{x: '0, y: '0, z: to_fx(1.0)};
            st <= S_TRIG;
          end else begin
            st <= S_REPLAY;
          end
        end
        S_TRIG: st <= (i != 3'(NJ)) ? S_WAIT : S_UPD;
        S_WAIT: if (cs_done) st <= S_UPD;
        S_UPD: begin
          c1 <= n1; c2 <= n2; c3 <= c3p;
          p_tab[i] <= pn;
          if (i != 3'(NJ)) z_tab[i] <= c3p;
          if (i != 0) r_tab[i - 3'd1] <= v_sub(pn, p_tab[i - 3'd1]);
          st <= (i == 0) ? S_TRIG : S_EMIT;
          if (i == 0) i <= i + 1'b1;
        end
        S_EMIT: if (rec_ready) begin
          if (i == 3'(NJ)) begin
            st <= S_JAC; k <= '0;
          end else begin
            i <= i + 1'b1; st <= S_TRIG;
          end
        end
        S_JAC: begin
          vec3_t col;
          col = v_cross(z_tab[k], v_sub(p_tab[NJ], p_tab[k]));
          jac_t[k]  <= col;
          jac[0][k] <= col.x;
          jac[1][k] <= col.y;
          jac[2][k] <= col.z;
          k <= k + 1'b1;
          if (k == lidx_t'(NJ - 1)) begin st <= S_IDLE; done <= 1'b1; end
        end
        S_REPLAY: if (rec_ready) begin
          k <= k + 1'b1;
          if (k == lidx_t'(NJ - 1)) begin st <= S_IDLE; done <= 1'b1; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
