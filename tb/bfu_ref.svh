// bfu_ref.svh -- bit-exact reference model of one butterfly PE, shared by the
// PE and PE-array testbenches. Arithmetic is done in 136 bits so that the
// same code serves the 17-bit and the 34-bit datapath. All values are
// redundant Montgomery residues in [0, 2q).
typedef logic [135:0] wide_t;

function automatic wide_t ref_mont(wide_t a, wide_t b, wide_t q, wide_t mu, int unsigned w);
  wide_t R = wide_t'(1) << w;
  wide_t ab = a * b;
  wide_t m = ((ab % R) * mu) % R;
  return (ab + m * q) >> w;
endfunction

// one butterfly: ntt = 1 forward (a + bw, a - bw), ntt = 0 inverse
// ((a + b)/2, (a - b + 2q) w) with w already halved; byp passes a, b through
task automatic ref_bfu(input bit ntt, input bit byp, input wide_t q, input wide_t mu,
                       input int unsigned w, input wide_t a, input wide_t b,
                       input wide_t tw, output wide_t ao, output wide_t bo);
  wide_t m, s;
  if (byp) begin ao = a; bo = b; return; end
  if (ntt) begin
    m  = ref_mont(b, tw, q, mu, w);
    s  = a + m;
    ao = (s >= 2 * q) ? s - 2 * q : s;
    bo = (a >= m) ? a - m : a + 2 * q - m;
  end else begin
    m  = ref_mont(a + 2 * q - b, tw, q, mu, w);
    s  = a + b;
    ao = !s[0] ? s / 2 : (s < 2 * q) ? (s + q) / 2 : (s - q) / 2;
    bo = m;
  end
endtask

// mu = -q^-1 mod 2^w by Newton iteration; arithmetic wraps modulo 2^64,
// which 2^w divides
function automatic wide_t ref_neg_inv(wide_t q, int unsigned w);
  longint unsigned qq = 64'(q), inv = 64'(q);
  for (int i = 0; i < 6; i++) inv = inv * (64'd2 - qq * inv);
  return wide_t'((~inv + 64'd1) & ((64'd1 << w) - 64'd1));
endfunction
