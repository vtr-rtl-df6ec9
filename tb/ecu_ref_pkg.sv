// ecu_ref_pkg: reference model of the element-wise unit in real arithmetic,
// shared by the element-wise testbenches. Inputs and outputs are Q8.8 integers
// (outputs as reals in LSB units).
package ecu_ref_pkg;
function automatic int ref_x(input int a, input int b, input int c);
  longint v;
  v = ((longint'(a) * longint'(b)) >>> 8) + longint'(c);
  if (v > 32767) v = 32767;
  if (v < -32768) v = -32768;
  return int'(v);
endfunction

function automatic real ref_f(input int f, input int xi);
  real x, y;
  x = real'(xi) / 256.0;
  case (f)
    1: y = 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
    2: y = $exp(x);
    3: y = (xi == 0) ? 1.0e9 : 1.0 / x;
    4: y = (xi <= 0) ? 1.0e9 : 1.0 / $sqrt(x);
    default: y = x;
  endcase
  y = y * 256.0;
  if (y > 32767.0) y = 32767.0;
  if (y < -32768.0) y = -32768.0;
  return y;
endfunction

// accepted error: 3 LSB or 1.5 % of the value
function automatic bit ref_ok(input int f, input int xi, input int yi);
  real r, e;
  r = ref_f(f, xi);
  e = (real'(yi) > r) ? real'(yi) - r : r - real'(yi);
  return (e <= 3.0) || (e <= 0.015 * ((r > 0.0) ? r : -r));
endfunction
endpackage
