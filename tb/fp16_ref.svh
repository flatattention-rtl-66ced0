// fp16_ref.svh: reference FP16 arithmetic for the testbenches, computed in
// double precision (exact for one FP16 addition) and rounded back to FP16
// with round to nearest, ties to even. Included inside testbench modules.

function automatic real fp16_to_real(logic [15:0] h);
  real m;
  int  e;
  e = int'(h[14:10]);
  if (e == 0) m = real'(h[9:0]) * (2.0 ** -24);
  else        m = real'(1024 + int'(h[9:0])) * (2.0 ** (e - 25));
  return h[15] ? -m : m;
endfunction

function automatic logic [15:0] real_to_fp16(real v);
  logic s;
  real  a, n, fl;
  int   e;
  s = (v < 0.0);
  a = s ? -v : v;
  if (a == 0.0) return {s, 15'd0};
  if (a >= 65520.0) return {s, 5'h1f, 10'd0};
  e = 15;
  while ((2.0 ** e) > a && e > -14) e--;
  n  = a * (2.0 ** (10 - e));
  fl = $floor(n);
  if ((n - fl) > 0.5 || ((n - fl) == 0.5 && ($rtoi(fl) % 2) == 1)) fl = fl + 1.0;
  if (fl >= 2048.0) begin
    fl = fl / 2.0;
    e  = e + 1;
  end
  if (e + 15 >= 31) return {s, 5'h1f, 10'd0};
  if (fl >= 1024.0) return {s, 5'(e + 15), 10'($rtoi(fl) - 1024)};
  return {s, 5'd0, 10'($rtoi(fl))};
endfunction

function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
  real  r;
  logic an, bn, ai, bi;
  an = (a[14:10] == 5'h1f) && (a[9:0] != 0);
  bn = (b[14:10] == 5'h1f) && (b[9:0] != 0);
  ai = (a[14:10] == 5'h1f) && (a[9:0] == 0);
  bi = (b[14:10] == 5'h1f) && (b[9:0] == 0);
  if (an || bn || (ai && bi && a[15] != b[15])) return 16'h7e00;
  if (ai) return a;
  if (bi) return b;
  r = fp16_to_real(a) + fp16_to_real(b);
  if (r == 0.0) return (a[15] && b[15]) ? 16'h8000 : 16'h0000;
  return real_to_fp16(r);
endfunction

function automatic logic [15:0] ref_max(logic [15:0] a, logic [15:0] b);
  real ra, rb;
  ra = fp16_to_real(a);
  rb = fp16_to_real(b);
  if (rb > ra) return b;
  if (ra > rb) return a;
  return a[15] ? b : a;   // +0 beats -0
endfunction

// A random finite FP16 value; small exponents now and then for subnormals.
function automatic logic [15:0] rand_fp16();
  logic [15:0] h;
  h = 16'($urandom);
  if (h[14:10] == 5'h1f) h[14:10] = 5'h1e;
  if ($urandom_range(7) == 0) h[14:10] = 5'($urandom_range(2));
  return h;
endfunction
