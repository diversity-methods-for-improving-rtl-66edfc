// qec_pkg: types, constants and code-construction functions shared by the emulator.
//
// The emulator is written for one family of quantum LDPC codes whose Tanner graph can be
// computed from a closed formula: the bivariate bicycle (BB) codes with
//   A = x^3 + y + y^2,  B = y^3 + x + x^2,  x = S_l (x) I_m,  y = I_l (x) S_m,
//   H_X = [A | B],  H_Z = [B^T | A^T],
// where S_k is the k x k cyclic shift. With (l,m) = (6,6), (9,6) and (12,6) these give the
// (72,12,6), (108,8,10) and (144,12,12) codes. Every check has degree 6 and every qubit
// degree 3, so the decoder can be generated from index functions instead of a stored matrix.
// The decoder sees H_X: syndromes of Z-type errors on the n = 2*l*m data qubits.
//
// Check c = i*m + j (0 <= i < l, 0 <= j < m). Its six edges, in this fixed order, reach
//   k=0: left  qubit ((i+3)%l, j)      (x^3)
//   k=1: left  qubit (i, (j+1)%m)      (y)
//   k=2: left  qubit (i, (j+2)%m)      (y^2)
//   k=3: right qubit (i, (j+3)%m)      (y^3)
//   k=4: right qubit ((i+1)%l, j)      (x)
//   k=5: right qubit ((i+2)%l, j)      (x^2)
// A left qubit takes part in edges k = 0,1,2 of three different checks, a right qubit in
// edges k = 3,4,5; bb_var_chk() inverts the shifts.
package qec_pkg;

  localparam int CHK_DEG = 6;           // check-node degree of H_X
  localparam int VAR_DEG = 3;           // variable-node degree of H_X

  // Widths of the run-time parameters and results of the emulator.
  localparam int RATE_W  = 18;          // physical error rate / random numbers
  localparam int ITER_W  = 8;           // maximum number of decoder iterations
  localparam int ERRC_W  = 16;          // physical and logical error counters, target
  localparam int FRAME_W = 80;          // decoded-frame counter
  localparam int ITOT_W  = FRAME_W + ITER_W;  // accumulated iteration counter
  localparam int LLR_W   = 12;          // prior LLR as given to the decoders
  localparam int LLR_F   = 4;           // fractional bits of the prior LLR

  function automatic int md(input int a, input int b);
    return ((a % b) + b) % b;
  endfunction

  // Qubit reached by edge k of check c of H_X.
  function automatic int bb_chk_var(input int l, input int m, input int c, input int k);
    int i, j;
    i = c / m;
    j = c % m;
    case (k)
      0:       return md(i + 3, l) * m + j;
      1:       return i * m + md(j + 1, m);
      2:       return i * m + md(j + 2, m);
      3:       return l * m + i * m + md(j + 3, m);
      4:       return l * m + md(i + 1, l) * m + j;
      default: return l * m + md(i + 2, l) * m + j;
    endcase
  endfunction

  // Check reached by the t-th edge (t = 0..2) of qubit v of H_X.
  function automatic int bb_var_chk(input int l, input int m, input int v, input int t);
    int i, j, q;
    q = (v < l * m) ? v : v - l * m;
    i = q / m;
    j = q % m;
    if (v < l * m) begin
      case (t)
        0:       return md(i - 3, l) * m + j;
        1:       return i * m + md(j - 1, m);
        default: return i * m + md(j - 2, m);
      endcase
    end else begin
      case (t)
        0:       return i * m + md(j - 3, m);
        1:       return md(i - 1, l) * m + j;
        default: return md(i - 2, l) * m + j;
      endcase
    end
  endfunction

  // Position, within the check's edge list, of the t-th edge of qubit v.
  function automatic int bb_var_pos(input int l, input int m, input int v, input int t);
    return (v < l * m) ? t : 3 + t;
  endfunction

  // Qubit reached by edge k of row c of H_Z = [B^T | A^T].
  function automatic int bb_hz_var(input int l, input int m, input int c, input int k);
    int i, j;
    i = c / m;
    j = c % m;
    case (k)
      0:       return i * m + md(j - 3, m);                // (y^3)^T
      1:       return md(i - 1, l) * m + j;                // x^T
      2:       return md(i - 2, l) * m + j;                // (x^2)^T
      3:       return l * m + md(i - 3, l) * m + j;        // (x^3)^T
      4:       return l * m + i * m + md(j - 1, m);        // y^T
      default: return l * m + i * m + md(j - 2, m);        // (y^2)^T
    endcase
  endfunction

  // Saturate a signed value to the symmetric range of a W-bit two's-complement message.
  function automatic int sat_sym(input int v, input int w);
    int lim;
    lim = (1 << (w - 1)) - 1;
    if (v > lim) return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

endpackage
