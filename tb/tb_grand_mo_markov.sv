// tb_grand_mo_markov -- the decoder on a two-state Markov (Gilbert) burst
// channel, at the default size, with the query order (m=2, l1=32, l2=16).
//
// Code: a random systematic (128,104) linear code (n-k = 24; rows 24..31 of
// H are zero, the rate-compatible use of the 32-row H memory). Channel: in
// the good state G no bit is flipped, in the bad state B every bit is; the
// state moves G->B with probability b and B->G with probability g, so bursts
// have mean length 1/g and the stationary flip probability is
// p = b/(b+g) = Q(sqrt(2 R Eb/N0)). Q is evaluated with the Abramowitz-Stegun
// erfc approximation 7.1.26. For g = 0.4 and a few Eb/N0 points, frames are
// decoded and each result is checked against the reference model (walk of
// the query order with burst syndromes from H); the frame error rate and the
// average number of time steps are printed. Frame counts are far too small
// to reach the FER of 1e-5 discussed with this code; the run shows the
// decoder working on channel-like noise and how the average step count falls
// towards one cycle as the SNR grows.
module tb_grand_mo_markov;
  import grand_mo_pkg::*;

  localparam int unsigned N    = 128;
  localparam int unsigned NK   = 32;
  localparam int unsigned LMAX = 32;
  localparam int unsigned NKU  = 24;          // parity bits of the code used
  localparam int unsigned K    = N - NKU;
  localparam int unsigned LW   = $clog2(LMAX + 1);
  localparam int          CFG_M = 2, CFG_L1 = 32, CFG_L2 = 16;
  localparam real         G_TR  = 0.4;        // B -> G transition probability
  localparam int unsigned FRAMES = 800;       // frames per Eb/N0 point

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 h_load = 1'b0;
  logic [N-1:0][NK-1:0] h_in = '0;
  logic                 h_ready;
  logic [1:0]           cfg_m = 2'(CFG_M);
  logic [LW-1:0]        cfg_l1 = LW'(CFG_L1);
  logic [LW-1:0]        cfg_l2 = LW'(CFG_L2);
  logic                 in_valid = 1'b0;
  logic                 in_ready;
  logic [N-1:0]         r_in = '0;
  logic                 out_valid;
  logic                 out_ready = 1'b0;
  logic [N-1:0]         u_hat;
  logic                 abandon;
  logic [1:0]           n_bursts;
  logic [31:0]          steps;

  grand_mo_top dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------- channel
  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  function automatic real qfunc(input real x);   // Q(x) = erfc(x/sqrt 2)/2
    real z, t, erfc;
    z = x / $sqrt(2.0);
    t = 1.0 / (1.0 + 0.3275911 * z);
    erfc = t * (0.254829592 + t * (-0.284496736 + t * (1.421413741 +
           t * (-1.453152027 + t * 1.061405429)))) * $exp(-z * z);
    return 0.5 * erfc;
  endfunction

  // ------------------------------------------------------ reference model
  logic [N-1:0][NK-1:0] H;
  logic [NK-1:0] bsyn [N][LMAX+1];

  function automatic logic [NK-1:0] syn(input logic [N-1:0] v);
    logic [NK-1:0] s = '0;
    for (int j = 0; j < int'(N); j++) if (v[j]) s ^= H[j];
    return s;
  endfunction

  function automatic logic [N-1:0] burst(input int start, input int len);
    logic [N-1:0] v = '0;
    for (int j = start; j < start + len; j++) v[j] = 1'b1;
    return v;
  endfunction

  typedef struct { logic [N-1:0] e; bit ab; int steps; } ref_t;

  function automatic ref_t ref_decode(input logic [N-1:0] r);
    ref_t res;
    logic [NK-1:0] s = syn(r);
    int L = (CFG_M == 2) ? ((CFG_L1 < CFG_L2) ? CFG_L1 : CFG_L2) : 0;
    res.e = '0; res.ab = 0; res.steps = 1;
    if (s == '0) return res;
    res.steps = 2;
    for (int c = 0; c < int'(N); c++)
      for (int len = 1; len <= CFG_L1 && c + len <= int'(N); len++)
        if (bsyn[c][len] == s) begin res.e = burst(c, len); return res; end
    for (int l = 1; l <= L; l++)
      for (int a = 0; a <= int'(N) - l - 2; a++) begin
        logic [NK-1:0] fs = bsyn[a][l];
        res.steps++;
        for (int c = a + l + 1; c < int'(N); c++)
          for (int len = 1; len <= CFG_L2 && c + len <= int'(N); len++)
            if ((fs ^ bsyn[c][len]) == s) begin
              res.e = burst(a, l) | burst(c, len); return res;
            end
      end
    res.ab = 1;
    return res;
  endfunction

  initial begin
    real ebn0_db[4] = '{4.0, 6.0, 8.0, 10.0};
    real rate, p, b;
    logic [N-1:0] c, e, r;
    logic [NK-1:0] par;
    bit bad;
    int frame_err, sum_steps, lat;
    real avg_prev;
    ref_t exp;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < int'(N); j++)
      H[j] = (j < int'(K)) ? NK'($urandom & ((1 << NKU) - 1)) : (NK'(1) << (j - K));
    for (int cc = 0; cc < int'(N); cc++) begin
      bsyn[cc][0] = '0;
      for (int len = 1; len <= int'(LMAX); len++)
        bsyn[cc][len] = (cc + len <= int'(N)) ? (bsyn[cc][len-1] ^ H[cc+len-1]) : '0;
    end
    @(negedge clk);
    h_in = H; h_load = 1'b1;
    @(negedge clk);
    h_load = 1'b0;
    while (!h_ready) @(negedge clk);
    rate = real'(K) / real'(N);
    avg_prev = 1.0e9;
    foreach (ebn0_db[i]) begin
      p = qfunc($sqrt(2.0 * rate * (10.0 ** (ebn0_db[i] / 10.0))));
      b = p * G_TR / (1.0 - p);            // p = b/(b+g)
      frame_err = 0; sum_steps = 0;
      for (int f = 0; f < int'(FRAMES); f++) begin
        c = '0; par = '0;
        for (int j = 0; j < int'(K); j++) begin
          c[j] = 1'($urandom);
          if (c[j]) par ^= H[j];
        end
        for (int q = 0; q < int'(NKU); q++) c[K+q] = par[q];
        bad = (urand() < p);               // start in the stationary state
        e = '0;
        for (int j = 0; j < int'(N); j++) begin
          e[j] = bad;
          bad = bad ? (urand() >= G_TR) : (urand() < b);
        end
        r = c ^ e;
        exp = ref_decode(r);
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        r_in = r; in_valid = 1'b1;
        @(negedge clk);
        in_valid = 1'b0;
        lat = 0;
        while (!out_valid) begin @(negedge clk); lat++; end
        check(u_hat == (r ^ exp.e), "decoded word matches the reference model");
        check(abandon == exp.ab, "abandon flag");
        check(lat == exp.steps && int'(steps) == exp.steps, "latency in time steps");
        if (u_hat != c) frame_err++;
        sum_steps += lat;
        out_ready = 1'b1;
        @(negedge clk);
        out_ready = 1'b0;
      end
      $display("Eb/N0=%0.1f dB g=%0.2f p=%0.2e: FER=%0d/%0d avg steps=%0.2f",
               ebn0_db[i], G_TR, p, frame_err, FRAMES, real'(sum_steps) / FRAMES);
      check(real'(sum_steps) / FRAMES <= avg_prev, "average steps fall with SNR");
      avg_prev = real'(sum_steps) / FRAMES;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
