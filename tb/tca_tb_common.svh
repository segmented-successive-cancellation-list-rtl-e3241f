// Shared transmitter model and frame checker for the decoder testbenches.
// The including module defines N, K, M, L, P, Q, CLEN[P], CPOLY[P], the
// clock `clk`, the cycle counter `cyc`, checks/failures, and instantiates the
// decoder as u_dut with its ports wired to ch, mask, start and the out_* nets.
//
// Transmitter: the information set holds the K+M most reliable positions of a
// BEC(0.5) construction, I(2i-1) = I(i)^2 and I(2i) = 2I(i) - I(i)^2 (mode 0),
// or, to load the CRC stage harder, every position of the last segment plus
// the most reliable others (mode 1). In segment j the last CLEN[j]
// information positions carry the CRC of the segment's data bits (remainder
// of data * x^W / g, g = {POLY,1}, most significant first). The codeword is
// x = u F^{(x)n}; BPSK, Gaussian noise, LLR = 2y/sigma^2 on a 0.5 grid.

localparam int NP = N / P;
localparam int KMT = K + M;

typedef struct {
  bit     bits [$];     // expected K+M decoder output bits (decoding order)
  int     start_cyc;
  bit     clean;        // high SNR: output must be exact
  bit     isolated;     // no other frame in flight: latency is checked
  int     lat_exp;
} frame_t;

frame_t exp_q [$];
int n_ok = 0, n_early = 0, n_overlap = 0, n_bit_err_frames = 0;
int n_refresh = 0, n_stall = 0, n_prune = 0, n_frozen = 0;

function automatic real bec_cap(int i);
  real c; c = 0.5;
  for (int b = $clog2(N) - 1; b >= 0; b--) c = (((i >> b) & 1) != 0) ?2.0*c - c*c : c*c;
  return c;
endfunction

function automatic void make_mask(int mode, output bit m [N]);
  automatic int order [$];
  automatic int need = KMT;
  for (int i = 0; i < N; i++) m[i] = 0;
  if (mode == 1) begin
    for (int i = N - NP; i < N; i++) m[i] = 1;
    need = KMT - NP;
  end
  for (int i = 0; i < N; i++) if (!m[i]) order.push_back(i);
  for (int a = 0; a < need; a++) begin
    int bi; bi = a;
    for (int c = a + 1; c < order.size(); c++) if (bec_cap(order[c]) > bec_cap(order[bi])) bi = c;
    begin int t; t = order[a]; order[a] = order[bi]; order[bi] = t; end
    m[order[a]] = 1;
  end
endfunction

function automatic void crc_rem(bit msg [$], int W, int poly, output bit rem [$]);
  automatic bit g [$];
  automatic bit w [$];
  for (int i = W - 1; i >= 0; i--) g.push_back(poly[i]);
  g.push_back(1'b1);
  w = msg;
  for (int i = 0; i < W; i++) w.push_back(1'b0);
  for (int i = 0; i < msg.size(); i++)
    if (w[i]) for (int k = 0; k <= W; k++) w[i+k] ^= g[k];
  rem = {};
  for (int i = msg.size(); i < w.size(); i++) rem.push_back(w[i]);
endfunction

function automatic real gauss();
  real u1, u2;
  u1 = (real'($urandom_range(1000000)) + 1.0) / 1000001.0;
  u2 = real'($urandom_range(1000000)) / 1000000.0;
  return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
endfunction

// builds one frame: fills ch[] and mask, returns the expected output bits.
// snr_db < -50 sends random LLRs (no codeword).
task automatic build_frame(int mode, real snr_db, output bit expbits [$]);
  automatic bit m [N];
  automatic bit u [N];
  automatic real sigma, rate;
  make_mask(mode, m);
  for (int i = 0; i < N; i++) begin u[i] = 0; mask[i] = m[i]; end
  expbits = {};
  for (int j = 0; j < P; j++) begin
    automatic int pos [$];
    automatic bit data [$];
    automatic bit rem [$];
    for (int i = j*NP; i < (j+1)*NP; i++) if (m[i]) pos.push_back(i);
    for (int a = 0; a < pos.size() - CLEN[j]; a++) data.push_back(1'($urandom));
    crc_rem(data, CLEN[j], CPOLY[j], rem);
    foreach (data[a]) u[pos[a]] = data[a];
    foreach (rem[a]) u[pos[data.size() + a]] = rem[a];
    foreach (pos[a]) expbits.push_back(u[pos[a]]);
  end
  // x = u F^{(x)n}
  for (int h = 1; h < N; h *= 2)
    for (int i = 0; i < N; i++) if ((i & h) == 0) u[i] ^= u[i + h];
  rate  = real'(K) / real'(N);
  sigma = $sqrt(1.0 / (2.0 * rate * $pow(10.0, snr_db / 10.0)));
  for (int i = 0; i < N; i++) begin
    real y, llr; int qv;
    if (snr_db < -50.0) qv = int'($urandom_range(255)) - 128;
    else begin
      y   = (u[i] ? -1.0 : 1.0) + sigma * gauss();
      llr = 2.0 * y / (sigma * sigma);
      qv  = int'(llr * 2.0);          // 0.5 grid
      if (qv > 127) qv = 127;
      if (qv < -128) qv = -128;
    end
    ch[i] = Q'(qv);
  end
endtask

function automatic int expected_latency(bit m [N]);
  int lat, kj;
  lat = 2*N - 2;
  for (int j = 0; j < P; j++) begin
    kj = 0;
    for (int i = j*NP; i < (j+1)*NP; i++) kj += m[i];
    lat += (j < P - 1) ? 2*kj + 3 : 2*kj + 5;   // +1: result register, sampled at the next edge
  end
  return lat;
endfunction

// start one frame; when `isolated`, wait until its result has come out
task automatic send(int mode, real snr_db, bit clean, bit isolated);
  automatic frame_t f;
  automatic bit eb [$];
  automatic bit m [N];
  while (!ready) @(negedge clk);
  build_frame(mode, snr_db, eb);
  make_mask(mode, m);
  f.bits = eb; f.clean = clean; f.isolated = isolated;
  f.lat_exp = expected_latency(m);
  start = 1;
  f.start_cyc = cyc;
  exp_q.push_back(f);
  @(negedge clk);
  start = 0;
  if (isolated) while (exp_q.size() != 0) @(negedge clk);
endtask

// checks a finished frame against its expected bits and segment CRCs
always @(posedge clk) begin
  if (u_dut.ref_fire) n_refresh++;
  if (u_dut.crc_stall) n_stall++;
  if (u_dut.dec_fire && !u_dut.is_info) n_frozen++;
  if (u_dut.dec_fire) begin
    automatic int nv = 0;
    for (int c = 0; c < 2*L; c++) nv += u_dut.cand_valid[c];
    if (nv > L) n_prune++;
  end
  if (out_valid && rst_n) begin
    automatic frame_t f;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      f = exp_q.pop_front();
      if (!ready) n_overlap++;
      if (out_ok) begin
        automatic int errs = 0;
        n_ok++;
        checks++;
        if (int'(out_seg) != P) begin failures++; $display("ok frame reports %0d segments", out_seg); end
        for (int a = 0; a < KMT; a++) errs += (out_bits[a] != f.bits[a]);
        if (errs != 0) n_bit_err_frames++;
        if (f.clean) begin
          checks++;
          if (errs != 0) begin failures++; $display("clean frame decoded with %0d bit errors", errs); end
        end
        if (f.isolated) begin
          checks++;
          if (cyc - f.start_cyc != f.lat_exp) begin
            failures++; $display("latency %0d expected %0d", cyc - f.start_cyc, f.lat_exp);
          end
        end
      end else begin
        n_early++;
        checks++;
        if (int'(out_seg) >= P) begin failures++; $display("failed frame reports all segments"); end
        if (f.clean) begin failures++; $display("clean frame terminated early at segment %0d", out_seg); end
      end
    end
  end
end

task automatic report_mechanisms();
  $display("frames ok=%0d early_terminated=%0d wrong_but_passed=%0d overlap=%0d refresh=%0d stall=%0d prune=%0d frozen=%0d",
           n_ok, n_early, n_bit_err_frames, n_overlap, n_refresh, n_stall, n_prune, n_frozen);
  checks += 6;
  if (n_early == 0)   begin failures++; $display("early termination never happened"); end
  if (n_overlap == 0) begin failures++; $display("last-segment check never overlapped a new frame"); end
  if (n_refresh == 0) begin failures++; $display("segment survivor write-back never happened"); end
  if (n_stall == 0)   begin failures++; $display("CRC-busy stall never happened"); end
  if (n_prune == 0)   begin failures++; $display("list pruning never happened"); end
  if (n_frozen == 0)  begin failures++; $display("no frozen bit decided"); end
endtask
