// qsim_ref_pkg: software side of the testbenches. It plays the host's part
// (gate matrices for H, X, Y, Z and R_m, controls sorted in ascending order)
// and holds a double-precision reference state vector that applies each gate
// the straightforward way: visit all 2^(n-1) pairs and update only those whose
// first index has a 1 at every control position.
package qsim_ref_pkg;

  typedef enum int { G_H, G_X, G_Y, G_Z, G_R, G_RAND } gate_kind_e;

  typedef struct {
    gate_kind_e kind;
    int         m;        // R_m: phase 2*pi/2^m
    int         target;
    int         ctrl[$];  // any order; sorted before use
  } gate_t;

  // Gate matrix [mat0 mat1; mat2 mat3], real and imaginary parts.
  function automatic void gate_matrix(input gate_kind_e k, input int m,
                                      output real re[4], output real im[4]);
    real s2 = 1.0 / $sqrt(2.0);
    real pi = 3.14159265358979323846;
    re = '{0.0, 0.0, 0.0, 0.0};
    im = '{0.0, 0.0, 0.0, 0.0};
    case (k)
      G_H: re = '{s2, s2, s2, -s2};
      G_X: re = '{0.0, 1.0, 1.0, 0.0};
      G_Y: im = '{0.0, -1.0, 1.0, 0.0};
      G_Z: re = '{1.0, 0.0, 0.0, -1.0};
      G_R: begin
        re = '{1.0, 0.0, 0.0, $cos(2.0 * pi / (2.0 ** m))};
        im[3] = $sin(2.0 * pi / (2.0 ** m));
      end
      default: for (int j = 0; j < 4; j++) begin
        re[j] = (real'($urandom_range(2000, 0)) - 1000.0) / 1500.0;
        im[j] = (real'($urandom_range(2000, 0)) - 1000.0) / 1500.0;
      end
    endcase
  endfunction

  class ref_state;
    int  n;
    real re[], im[];

    function new(int nq);
      n  = nq;
      re = new[1 << nq];
      im = new[1 << nq];
    endfunction

    function void apply(input int t, input int ctrl[$], input real mr[4], input real mi[4]);
      for (int k = 0; k < (1 << n); k++) begin
        bit ok;
        real ar, ai, br, bi;
        int  k2;
        if (((k >> t) & 1) != 0) continue;
        ok = 1;
        foreach (ctrl[j]) if (((k >> ctrl[j]) & 1) == 0) ok = 0;
        if (!ok) continue;
        k2 = k + (1 << t);
        ar = re[k];  ai = im[k];  br = re[k2]; bi = im[k2];
        re[k]  = mr[0]*ar - mi[0]*ai + mr[1]*br - mi[1]*bi;
        im[k]  = mr[0]*ai + mi[0]*ar + mr[1]*bi + mi[1]*br;
        re[k2] = mr[2]*ar - mi[2]*ai + mr[3]*br - mi[3]*bi;
        im[k2] = mr[2]*ai + mi[2]*ar + mr[3]*bi + mi[3]*br;
      end
    endfunction
  endclass

endpackage
