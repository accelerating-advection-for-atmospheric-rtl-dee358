// Reference model for the testbenches: the PW advection source terms written
// the way the Fortran scheme reads, on `real` (IEEE double) values, with
// stencil offsets U(di, dj, dk) for x, y and z. Its results are compared bit
// for bit with the hardware, which rounds the same way.
package tb_ref_pkg;

  typedef real cube_t [3][3][3];

  function automatic real rnd_real(input real scale);
    return (real'($urandom_range(0, 2000000)) - 1000000.0) / 1000000.0 * scale;
  endfunction

  // field 0: su, 1: sv, 2: sw
  function automatic real pw_source(input int field, input cube_t u, input cube_t v,
                                    input cube_t w, input real tcx, input real tcy,
                                    input real c1, input real c2,
                                    input bit top, input bit bottom);
    real s;
    `define U(a,b,c) u[(a)+1][(b)+1][(c)+1]
    `define V(a,b,c) v[(a)+1][(b)+1][(c)+1]
    `define W(a,b,c) w[(a)+1][(b)+1][(c)+1]
    if (bottom) return 0.0;
    case (field)
      0: begin
        s = tcx * (`U(-1,0,0) * (`U(0,0,0) + `U(-1,0,0)) - `U(1,0,0) * (`U(0,0,0) + `U(1,0,0)));
        s = s + tcy * (`U(0,-1,0) * (`V(0,-1,0) + `V(1,-1,0)) - `U(0,1,0) * (`V(0,0,0) + `V(1,0,0)));
        if (!top)
          s = s + c1 * `U(0,0,-1) * (`W(0,0,-1) + `W(1,0,-1)) - c2 * `U(0,0,1) * (`W(0,0,0) + `W(1,0,0));
        else
          s = s + c1 * `U(0,0,-1) * (`W(0,0,-1) + `W(1,0,-1));
      end
      1: begin
        s = tcx * (`V(-1,0,0) * (`U(-1,0,0) + `U(-1,1,0)) - `V(1,0,0) * (`U(0,0,0) + `U(0,1,0)));
        s = s + tcy * (`V(0,-1,0) * (`V(0,0,0) + `V(0,-1,0)) - `V(0,1,0) * (`V(0,0,0) + `V(0,1,0)));
        if (!top)
          s = s + c1 * `V(0,0,-1) * (`W(0,0,-1) + `W(0,1,-1)) - c2 * `V(0,0,1) * (`W(0,0,0) + `W(0,1,0));
        else
          s = s + c1 * `V(0,0,-1) * (`W(0,0,-1) + `W(0,1,-1));
      end
      default: begin
        if (top) return 0.0;
        s = tcx * (`W(-1,0,0) * (`U(-1,0,0) + `U(-1,0,1)) - `W(1,0,0) * (`U(0,0,0) + `U(0,0,1)));
        s = s + tcy * (`W(0,-1,0) * (`V(0,-1,0) + `V(0,-1,1)) - `W(0,1,0) * (`V(0,0,0) + `V(0,0,1)));
        s = s + c1 * `W(0,0,-1) * (`W(0,0,0) + `W(0,0,-1)) - c2 * `W(0,0,1) * (`W(0,0,0) + `W(0,0,1));
      end
    endcase
    `undef U
    `undef V
    `undef W
    return s;
  endfunction

endpackage
