// tb_ref_pkg -- reference models used by the testbenches.
//
// Each model is written differently from the RTL it checks:
//  * polar_encode_ref: generator-matrix form, x_k = XOR of u_i over all i
//    whose index bits contain those of k (G = F^(x8), F = [1 0; 1 1]).
//  * frozen_ref: Bhattacharyya parameters in floating point (BEC, z0 = 0.5).
//  * scr_seq_ref: the x^4 + x^3 + 1 sequence from its recurrence
//    s[n] = s[n-3] ^ s[n-4].
//  * crc16_ref: CRC-16-CCITT by polynomial division of the augmented message.
//  * sc_decode_ref: recursive successive-cancellation decoder (min-sum, same
//    saturation as the hardware PEs).
package tb_ref_pkg;
  localparam int N = 256;
  localparam int K = 158;

  function automatic logic [N-1:0] polar_encode_ref(input logic [N-1:0] u, input int n = N);
    logic [N-1:0] x;
    x = '0;
    for (int k = 0; k < n; k++)
      for (int i = 0; i < n; i++)
        if ((i & k) == k) x[k] = x[k] ^ u[i];
    return x;
  endfunction

  function automatic logic [N-1:0] frozen_ref(input int kk = K);
    real z [N];
    real zn [N];
    int  len;
    logic [N-1:0] m;
    z[0] = 0.5; len = 1;
    while (len < N) begin
      for (int i = 0; i < len; i++) begin
        zn[2*i]   = 2.0 * z[i] - z[i] * z[i];
        zn[2*i+1] = z[i] * z[i];
      end
      len = len * 2;
      for (int i = 0; i < len; i++) z[i] = zn[i];
    end
    // frozen = N-kk indices of largest z (ties: smaller index is worse)
    m = '0;
    for (int i = 0; i < N; i++) begin
      int worse;
      worse = 0;
      for (int j = 0; j < N; j++)
        if (z[j] > z[i] || (z[j] == z[i] && j < i)) worse++;
      if (worse < N - kk) m[i] = 1'b1;
    end
    return m;
  endfunction

  // scrambling sequence for 'len' bits from a 4-bit seed {r4,r3,r2,r1}
  function automatic logic [255:0] scr_seq_ref(input logic [3:0] seed, input int len);
    logic [255+4:0] s;   // s[n] for n = -4 .. len-1 stored at n+4
    logic [255:0] out;
    // with state r1..r4 the next outputs are r4, r3, r2, r1, then recurrence
    s[0] = seed[3]; s[1] = seed[2]; s[2] = seed[1]; s[3] = seed[0];
    out = '0;
    for (int n = 4; n < len + 4; n++) s[n] = s[n-3] ^ s[n-4];
    for (int n = 0; n < len; n++) out[n] = s[n];
    return out;
  endfunction

  function automatic logic [15:0] crc16_ref(input logic [135:0] msg);
    // remainder of (msg * x^16 + init * x^136) / (x^16 + x^12 + x^5 + 1)
    logic [16+136-1:0] a;
    a = {msg, 16'h0000};
    a[151 -: 16] = a[151 -: 16] ^ 16'hFFFF;
    for (int i = 151; i >= 16; i--)
      if (a[i]) a[i -: 17] = a[i -: 17] ^ 17'h11021;
    return a[15:0];
  endfunction

  function automatic int sat8(input int v);
    if (v > 127) return 127;
    if (v < -127) return -127;
    return v;
  endfunction

  function automatic int fmin(input int a, input int b);
    int ma, mb, m;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    m = (ma < mb) ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  // recursive SC decoding of the sub-tree covering u[base .. base+n-1];
  // llr holds n LLRs, u_hat/x_out get the decisions and the re-encoded bits
  function automatic void sc_rec(input int llr[], input int n, input int base,
                                 input logic [N-1:0] frozen,
                                 inout logic [N-1:0] u_hat, output logic x_out[]);
    int h;
    int la[], lb[];
    logic xa[], xb[];
    x_out = new[n];
    if (n == 1) begin
      u_hat[base] = frozen[base] ? 1'b0 : (llr[0] < 0);
      x_out[0] = u_hat[base];
      return;
    end
    h = n / 2;
    la = new[h];
    for (int k = 0; k < h; k++) la[k] = fmin(llr[k], llr[k+h]);
    sc_rec(la, h, base, frozen, u_hat, xa);
    lb = new[h];
    for (int k = 0; k < h; k++) lb[k] = sat8(xa[k] ? llr[k+h] - llr[k] : llr[k+h] + llr[k]);
    sc_rec(lb, h, base + h, frozen, u_hat, xb);
    for (int k = 0; k < h; k++) begin
      x_out[k]   = xa[k] ^ xb[k];
      x_out[k+h] = xb[k];
    end
  endfunction

  function automatic logic [N-1:0] sc_decode_ref(input int ch[N], input logic [N-1:0] frozen);
    int l[];
    logic [N-1:0] u;
    logic x[];
    l = new[N];
    for (int k = 0; k < N; k++) l[k] = ch[k];
    u = '0;
    sc_rec(l, N, 0, frozen, u, x);
    return u;
  endfunction

  // message bits in ascending information-index order
  function automatic logic [N-1:0] insert_ref(input logic [K-1:0] msg, input logic [N-1:0] frozen);
    logic [N-1:0] d;
    int p;
    d = '0; p = 0;
    for (int i = 0; i < N; i++) if (!frozen[i]) begin d[i] = msg[p]; p++; end
    return d;
  endfunction

  function automatic logic [K-1:0] extract_ref(input logic [N-1:0] d, input logic [N-1:0] frozen);
    logic [K-1:0] m;
    int p;
    m = '0; p = 0;
    for (int i = 0; i < N; i++) if (!frozen[i]) begin m[p] = d[i]; p++; end
    return m;
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction
endpackage
