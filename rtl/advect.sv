// Advection stage: computes the Piacsek-Williams source term of one field
// (FIELD = U, V or W) for one grid cell per cycle, in double precision.
//
// Each field's source term has the same shape, three flux differences:
//   s = tcx*(aX*(aX1+aX2) - bX*(bX1+bX2))
//     + tcy*(aY*(aY1+aY2) - bY*(bY1+bY2))
//     + c1(k)*aZ*(aZ1+aZ2) - c2(k)*bZ*(bZ1+bZ2)
// evaluated left to right as the Fortran of the paper's listing does, which
// is 21 floating point operations. Only the operands, taken from the u, v
// and w stencils, differ between fields; for U they are exactly the paper's
// listing, for V and W they follow the same PW scheme of the MONC model (the
// paper prints the U field only). c1, c2 are tzc1, tzc2 for U and V, and
// tzd1, tzd2 for W, held in a per-level table written by the host.
// Special levels: at the column top (k = nz-1) U and V drop the c2 term, as
// in the listing, and W is zero (rigid lid); at the ground (k = 0) all source
// terms are zero, since the scheme starts at the second level.
//
// Pipeline: seven register stages, one floating point operation deep each
//   1: the six pair sums and c1*aZ, c2*bZ   2: the six products
//   3: the X and Y differences              4: times tcx, tcy
//   5: X + Y                                6: + c1 term        7: - c2 term
// Inputs are joined: a cell is taken when all three stencils are valid.
// Initiation interval one; latency seven cycles from acceptance to out_valid.
// A stall on the output holds the pipeline.
module advect
  import adv_pkg::*;
  import fp64_pkg::*;
#(
  parameter field_e      FIELD  = FIELD_U,
  parameter int unsigned MAX_NZ = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  // constants: grid spacing factors and per-level coefficient table
  input  fp64_t        tcx,
  input  fp64_t        tcy,
  input  logic         coef_we,
  input  logic         coef_sel,   // 0: c1 (tzc1 / tzd1), 1: c2 (tzc2 / tzd2)
  input  idx_t         coef_k,
  input  fp64_t        coef_data,
  // stencils of u, v and w for the same cell
  input  logic [2:0]   in_valid,
  output logic [2:0]   in_ready,
  input  stencil_msg_t in_msg [3],
  // source term
  output logic         out_valid,
  input  logic         out_ready,
  output result_t      out_res
);

  localparam int unsigned ZAW = $clog2(MAX_NZ);

  fp64_t c1_tab [MAX_NZ];
  fp64_t c2_tab [MAX_NZ];

  always_ff @(posedge clk) begin
    if (coef_we && !coef_sel) c1_tab[coef_k[ZAW-1:0]] <= coef_data;
    if (coef_we &&  coef_sel) c2_tab[coef_k[ZAW-1:0]] <= coef_data;
  end

  // Operands of the three flux terms.
  typedef struct packed {
    fp64_t a, a1, a2, b, b1, b2;
  } flux_ops_t;

  stencil_t  u, v, w;
  flux_ops_t ox, oy, oz;
  assign u = in_msg[0].s;
  assign v = in_msg[1].s;
  assign w = in_msg[2].s;

  // [dx][dy][dz], 1 is the centre
  always_comb begin
    unique case (FIELD)
      FIELD_U: begin
        ox = '{u[0][1][1], u[1][1][1], u[0][1][1], u[2][1][1], u[1][1][1], u[2][1][1]};
        oy = '{u[1][0][1], v[1][0][1], v[2][0][1], u[1][2][1], v[1][1][1], v[2][1][1]};
        oz = '{u[1][1][0], w[1][1][0], w[2][1][0], u[1][1][2], w[1][1][1], w[2][1][1]};
      end
      FIELD_V: begin
        ox = '{v[0][1][1], u[0][1][1], u[0][2][1], v[2][1][1], u[1][1][1], u[1][2][1]};
        oy = '{v[1][0][1], v[1][1][1], v[1][0][1], v[1][2][1], v[1][1][1], v[1][2][1]};
        oz = '{v[1][1][0], w[1][1][0], w[1][2][0], v[1][1][2], w[1][1][1], w[1][2][1]};
      end
      default: begin
        ox = '{w[0][1][1], u[0][1][1], u[0][1][2], w[2][1][1], u[1][1][1], u[1][1][2]};
        oy = '{w[1][0][1], v[1][0][1], v[1][0][2], w[1][2][1], v[1][1][1], v[1][1][2]};
        oz = '{w[1][1][0], w[1][1][1], w[1][1][0], w[1][1][2], w[1][1][1], w[1][1][2]};
      end
    endcase
  end

  logic      adv, accept;
  logic [7:1] vld;
  cell_tag_t tag [7:1];

  assign adv      = !out_valid || out_ready;
  assign accept   = (&in_valid) && adv;
  assign in_ready = {3{accept}};

  // stage registers
  fp64_t s1_xa, s1_xb, s1_ya, s1_yb, s1_pa, s1_pb;
  fp64_t s1_xas, s1_xbs, s1_yas, s1_ybs, s1_zas, s1_zbs;
  fp64_t s2_mx1, s2_mx2, s2_my1, s2_my2, s2_mz1, s2_mz2;
  fp64_t s3_dx, s3_dy, s3_mz1, s3_mz2;
  fp64_t s4_ex, s4_ey, s4_mz1, s4_mz2;
  fp64_t s5_sum, s5_mz1, s5_mz2;
  fp64_t s6_sum, s6_mz2;
  fp64_t s7_res;

  idx_t in_k;
  assign in_k = in_msg[0].tag.k;

  always_ff @(posedge clk) begin
    if (adv) begin
      // 1: pair sums and coefficient products
      s1_xa  <= ox.a;  s1_xb <= ox.b;  s1_ya <= oy.a;  s1_yb <= oy.b;
      s1_xas <= fp64_add(ox.a1, ox.a2);
      s1_xbs <= fp64_add(ox.b1, ox.b2);
      s1_yas <= fp64_add(oy.a1, oy.a2);
      s1_ybs <= fp64_add(oy.b1, oy.b2);
      s1_zas <= fp64_add(oz.a1, oz.a2);
      s1_zbs <= fp64_add(oz.b1, oz.b2);
      s1_pa  <= fp64_mul(c1_tab[in_k[ZAW-1:0]], oz.a);
      s1_pb  <= fp64_mul(c2_tab[in_k[ZAW-1:0]], oz.b);
      // 2: products
      s2_mx1 <= fp64_mul(s1_xa, s1_xas);
      s2_mx2 <= fp64_mul(s1_xb, s1_xbs);
      s2_my1 <= fp64_mul(s1_ya, s1_yas);
      s2_my2 <= fp64_mul(s1_yb, s1_ybs);
      s2_mz1 <= fp64_mul(s1_pa, s1_zas);
      s2_mz2 <= fp64_mul(s1_pb, s1_zbs);
      // 3: differences
      s3_dx  <= fp64_sub(s2_mx1, s2_mx2);
      s3_dy  <= fp64_sub(s2_my1, s2_my2);
      s3_mz1 <= s2_mz1;  s3_mz2 <= s2_mz2;
      // 4: scale by tcx, tcy
      s4_ex  <= fp64_mul(tcx, s3_dx);
      s4_ey  <= fp64_mul(tcy, s3_dy);
      s4_mz1 <= s3_mz1;  s4_mz2 <= s3_mz2;
      // 5..7: accumulate in source order
      s5_sum <= fp64_add(s4_ex, s4_ey);
      s5_mz1 <= s4_mz1;  s5_mz2 <= s4_mz2;
      s6_sum <= fp64_add(s5_sum, s5_mz1);
      s6_mz2 <= s5_mz2;
      if (tag[6].bottom || (tag[6].top && FIELD == FIELD_W)) s7_res <= '0;
      else if (tag[6].top)                                   s7_res <= s6_sum;
      else                                                   s7_res <= fp64_sub(s6_sum, s6_mz2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int i = 1; i <= 7; i++) tag[i] <= '0;
    end else if (adv) begin
      vld[1] <= accept;
      tag[1] <= in_msg[0].tag;
      for (int i = 2; i <= 7; i++) begin
        vld[i] <= vld[i-1];
        tag[i] <= tag[i-1];
      end
    end
  end

  assign out_valid   = vld[7];
  assign out_res.v   = s7_res;
  assign out_res.tag = tag[7];

  // The three stencils of a cell must describe the same cell.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                              accept |-> (in_msg[0].tag == in_msg[1].tag &&
                                          in_msg[0].tag == in_msg[2].tag))
    else $error("advect: u, v, w stencils out of step");

endmodule
