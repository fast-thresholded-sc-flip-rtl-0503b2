// ftscf_ref_pkg: bit-accurate reference model and frame generator used by the
// decoder testbenches.
//
// ref_decoder models Fast-TSCF decoding of one frame with plain integer
// arrays: one LLR array and one partial-sum array per tree stage, the node
// rules written out directly (minima found by a full sort rather than a
// scan), and the decoded leaves obtained from the final codeword by a full
// polar transform.  It uses the same word lengths, saturation, tie-breaking
// and threshold comparisons as the RTL, and it counts cycles with the
// decoder's schedule (one cycle per P-lane f/g word, per special node and per
// step back up the tree, N/P + 2 per CRC check), so results and latencies can
// be compared exactly.
//
// frame_gen builds test frames: a frozen set from the polarisation-weight
// reliability order, a random message with its CRC-16 (0x1021) as the last 16
// information bits, polar encoding, BPSK over AWGN (Box-Muller noise from
// $urandom) and quantisation of the channel LLRs.
package ftscf_ref_pkg;

  localparam int MAXN = 1024;
  localparam int MAXL = 11;

  typedef enum int {K_NONE, K_R0, K_R1, K_REP, K_SPC} kind_t;

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // CRC-16/0x1021 over the information bits of u (MSB first, zero init).
  function automatic bit crc_zero(input bit u[MAXN], input bit info[MAXN], input int n);
    bit [15:0] c = 0;
    for (int i = 0; i < n; i++)
      if (info[i]) begin
        bit fb = c[15] ^ u[i];
        c = {c[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0);
      end
    return c == 0;
  endfunction

  // In-place polar transform (x = u G^n; also its own inverse).
  function automatic void polar_transform(ref bit v[MAXN], input int n);
    for (int t = 1; t < n; t <<= 1)
      for (int i = 0; i < n; i++)
        if ((i & t) == 0) v[i] ^= v[i + t];
  endfunction

  class ref_decoder;
    int n, logn, p, tmax, qi, maxv;
    int omega;
    bit info[MAXN];
    int alpha[MAXL][MAXN];
    bit beta[MAXL][MAXN];
    bit betal[MAXL][MAXN];
    // results
    bit u[MAXN];
    bit x[MAXN];
    bit ok;
    int attempts;
    int cycles;
    // candidate list
    int cand_start[$];
    int cand_sel[$];
    // event counters
    int n_kind[5];
    int n_flip_r1, n_flip_rep, n_flip_spc0, n_flip_spc1;
    int n_cand, n_list_full, n_big_special;

    function new(int n_, int p_, int tmax_, int qi_);
      n = n_; p = p_; tmax = tmax_; qi = qi_;
      logn = $clog2(n);
      maxv = (1 << (qi - 1)) - 1;
    endfunction

    function int sat(int v);
      if (v > maxv) return maxv;
      if (v < -maxv) return -maxv;
      return v;
    endfunction

    function kind_t classify(int s, int k);
      int sz = 1 << s, cnt = 0;
      bit first_info, last_info;
      for (int i = 0; i < sz; i++) cnt += info[k * sz + i];
      first_info = info[k * sz];
      last_info  = info[k * sz + sz - 1];
      if (cnt == 0) return K_R0;
      if (cnt == sz) return K_R1;
      if (s >= 1 && cnt == 1 && last_info) return K_REP;
      if (s >= 2 && cnt == sz - 1 && !first_info) return K_SPC;
      return K_NONE;
    endfunction

    // Indices of lanes 0..sz-1 ordered by (|alpha|, index).
    function void sorted3(int s, output int i1, output int i2, output int i3);
      int ord[$];
      int sz = 1 << s;
      for (int i = 0; i < sz; i++) ord.push_back(i);
      for (int a = 0; a < sz; a++)
        for (int b = a + 1; b < sz; b++) begin
          int ma = iabs(alpha[s][ord[a]]), mb = iabs(alpha[s][ord[b]]);
          if (mb < ma || (mb == ma && ord[b] < ord[a])) begin
            int t = ord[a]; ord[a] = ord[b]; ord[b] = t;
          end
        end
      i1 = ord[0];
      i2 = (sz > 1) ? ord[1] : 0;
      i3 = (sz > 2) ? ord[2] : 0;
    endfunction

    function void decode_node(kind_t kd, int s, int k, int att, int tgt_start, int tgt_sel);
      int sz = 1 << s;
      bit hit = (att != 0) && (tgt_start == k * sz);
      n_kind[kd]++;
      for (int i = 0; i < sz; i++) beta[s][i] = 0;
      case (kd)
        K_R1: begin
          int i1, i2, i3;
          sorted3(s, i1, i2, i3);
          for (int i = 0; i < sz; i++) beta[s][i] = alpha[s][i] < 0;
          if (att == 0 && iabs(alpha[s][i1]) <= omega) push(k * sz, 0);
          if (hit) begin beta[s][i1] ^= 1; n_flip_r1++; end
        end
        K_REP: begin
          int sum = 0;
          for (int i = 0; i < sz; i++) sum += alpha[s][i];
          if (att == 0 && iabs(sum) <= omega) push(k * sz, 0);
          for (int i = 0; i < sz; i++) beta[s][i] = (sum < 0) ^ hit;
          if (hit) n_flip_rep++;
        end
        K_SPC: begin
          int i1, i2, i3, m1, m2, m3;
          bit par = 0;
          sorted3(s, i1, i2, i3);
          m1 = iabs(alpha[s][i1]); m2 = iabs(alpha[s][i2]); m3 = iabs(alpha[s][i3]);
          for (int i = 0; i < sz; i++) begin
            beta[s][i] = alpha[s][i] < 0;
            par ^= beta[s][i];
          end
          if (att == 0) begin
            if (par ? (m2 <= omega) : (m1 + m2 <= omega)) push(k * sz, 0);
            if (par ? (m3 <= omega) : (m1 + m3 <= omega)) push(k * sz, 1);
          end
          if (!hit) begin
            if (par) beta[s][i1] ^= 1;
          end else if (tgt_sel == 0) begin
            if (par) beta[s][i2] ^= 1; else begin beta[s][i1] ^= 1; beta[s][i2] ^= 1; end
            n_flip_spc0++;
          end else begin
            if (par) beta[s][i3] ^= 1; else begin beta[s][i1] ^= 1; beta[s][i3] ^= 1; end
            n_flip_spc1++;
          end
        end
        default: ;
      endcase
    endfunction

    function void push(int start, int sel);
      n_cand++;
      if (cand_start.size() < tmax) begin
        cand_start.push_back(start);
        cand_sel.push_back(sel);
        if (cand_start.size() == tmax) n_list_full++;
      end
    endfunction

    function int words(int len);
      return (len >= p) ? len / p : 1;
    endfunction

    // One decoding attempt: SC traversal of the tree with fast nodes.
    function void attempt(int att, int tgt_start, int tgt_sel);
      int s = logn, k = 0;
      bit up = 0;
      forever begin
        if (!up) begin
          kind_t kd = classify(s, k);
          if (kd != K_NONE && (1 << s) > p) n_big_special++;
          if (kd != K_NONE && (1 << s) <= p) begin
            decode_node(kd, s, k, att, tgt_start, tgt_sel);
            cycles += 1;
            up = 1;
          end else begin
            int h = 1 << (s - 1);
            for (int i = 0; i < h; i++) begin
              int a = alpha[s][i], b = alpha[s][i + h];
              int m = (iabs(a) < iabs(b)) ? iabs(a) : iabs(b);
              alpha[s - 1][i] = ((a < 0) != (b < 0)) ? -m : m;
            end
            cycles += words(h);
            s--; k = 2 * k;
          end
        end else begin
          cycles += 1;
          if (s == logn) break;
          if (k % 2 == 1) begin
            int h = 1 << s;
            for (int i = 0; i < h; i++) begin
              beta[s + 1][i]     = betal[s][i] ^ beta[s][i];
              beta[s + 1][i + h] = beta[s][i];
            end
            s++; k = k / 2;
          end else begin
            int h = 1 << s;
            for (int i = 0; i < h; i++) betal[s][i] = beta[s][i];
            for (int i = 0; i < h; i++)
              alpha[s][i] = sat(alpha[s + 1][i + h] + (betal[s][i] ? -alpha[s + 1][i] : alpha[s + 1][i]));
            cycles += words(h);
            k++; up = 0;
          end
        end
      end
      for (int i = 0; i < n; i++) x[i] = beta[logn][i];
      u = x;
      polar_transform(u, n);
      cycles += n / p + 2;
    endfunction

    // Full frame: channel LLRs (already symmetric-saturated), info mask, Omega.
    function void decode(input int llr[MAXN], input bit info_in[MAXN], input int omega_in);
      omega = omega_in;
      info = info_in;
      cand_start.delete(); cand_sel.delete();
      cycles = 0;
      for (int i = 0; i < n; i++) alpha[logn][i] = llr[i];
      attempts = 0;
      attempt(0, 0, 0);
      ok = crc_zero(u, info, n);
      while (!ok && attempts < tmax && attempts < cand_start.size()) begin
        int t = attempts;
        attempts++;
        attempt(attempts, cand_start[t], cand_sel[t]);
        ok = crc_zero(u, info, n);
      end
    endfunction
  endclass

  class frame_gen;
    int n, k, qc, frac;
    bit info[MAXN];
    bit u[MAXN];
    bit x[MAXN];
    int llr[MAXN];

    function new(int n_, int k_, int qc_, int frac_);
      real w[MAXN];
      bit taken[MAXN];
      n = n_; k = k_; qc = qc_; frac = frac_;
      // Polarisation weight W(i) = sum_j b_j 2^(j/4); the K largest are info.
      for (int i = 0; i < n; i++) begin
        w[i] = 0.0;
        for (int b = 0; b < 11; b++)
          if ((i >> b) & 1) w[i] += $pow(2.0, b / 4.0);
        info[i] = 0;
        taken[i] = 0;
      end
      for (int c = 0; c < k; c++) begin
        int best = -1;
        for (int i = 0; i < n; i++)
          if (!taken[i] && (best < 0 || w[i] > w[best])) best = i;
        taken[best] = 1;
        info[best] = 1;
      end
    endfunction

    function real gauss();
      real u1, u2;
      u1 = (real'($urandom) + 1.0) / 4294967297.0;
      u2 = real'($urandom) / 4294967296.0;
      return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    endfunction

    // ebno_db: Eb/N0 of the channel; the code rate is K/N.
    function void make(real ebno_db);
      bit [15:0] c = 0;
      int nmsg = k - 16, cnt = 0;
      real sigma2, lim;
      lim = real'((1 << (qc - 1)) - 1);
      for (int i = 0; i < n; i++) begin
        u[i] = 0;
        if (info[i]) begin
          if (cnt < nmsg) begin
            bit fb;
            u[i] = $urandom & 1;
            fb = c[15] ^ u[i];
            c = {c[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0);
          end else begin
            u[i] = c[15 - (cnt - nmsg)];
          end
          cnt++;
        end
      end
      x = u;
      polar_transform(x, n);
      sigma2 = 1.0 / (2.0 * (real'(k) / real'(n)) * $pow(10.0, ebno_db / 10.0));
      for (int i = 0; i < n; i++) begin
        real y, l;
        y = (x[i] ? -1.0 : 1.0) + $sqrt(sigma2) * gauss();
        l = 2.0 * y / sigma2 * real'(1 << frac);
        if (l > lim) l = lim;
        if (l < -lim) l = -lim;
        llr[i] = $rtoi(l + ((l >= 0) ? 0.5 : -0.5));
      end
    endfunction
  endclass

endpackage
