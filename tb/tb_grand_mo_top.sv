// tb_grand_mo_top -- end-to-end test of the GRAND-MO decoder at reduced size
// (n = 32, n-k = 12, bursts up to 8 bits).
//
// A random systematic parity-check matrix H = [P | I] is loaded, random
// codewords are corrupted by zero, one or two noise bursts (or by dense random
// noise) and decoded. A reference model written here from the algorithm --
// walk the query order pattern by pattern, XOR-ing columns of H -- gives the
// expected corrected word, the number of bursts, the abandon flag and the
// number of time steps; the testbench also measures the cycles from
// acceptance to out_valid itself. Every mechanism of the design is counted
// and must occur: codeword detected by the syndrome check, single-burst hit,
// two-burst hit while sliding the first burst (shift by one), two-burst hit
// after a reset-and-shift to a longer first burst, abandon after the full
// worst-case step count, m = 1 decoding, output back-pressure and reloading H.
module tb_grand_mo_top;
  import grand_mo_pkg::*;

  localparam int unsigned N    = 32;
  localparam int unsigned NK   = 12;
  localparam int unsigned LMAX = 8;
  localparam int unsigned K    = N - NK;
  localparam int unsigned LW   = $clog2(LMAX + 1);
  localparam int unsigned NWORDS = 300;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 h_load = 1'b0;
  logic [N-1:0][NK-1:0] h_in = '0;
  logic                 h_ready;
  logic [1:0]           cfg_m = 2'd2;
  logic [LW-1:0]        cfg_l1 = LW'(LMAX);
  logic [LW-1:0]        cfg_l2 = LW'(LMAX);
  logic                 in_valid = 1'b0;
  logic                 in_ready;
  logic [N-1:0]         r_in = '0;
  logic                 out_valid;
  logic                 out_ready = 1'b0;
  logic [N-1:0]         u_hat;
  logic                 abandon;
  logic [1:0]           n_bursts;
  logic [31:0]          steps;

  grand_mo_top #(.N(N), .NK(NK), .LMAX(LMAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------- reference model
  logic [N-1:0][NK-1:0] H;

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

  typedef struct {
    logic [N-1:0] e;
    int           nb;
    bit           ab;
    int           steps;
    int           a;   // first-burst start of the hit step (two bursts)
    int           l;   // first-burst length of the hit step
  } ref_t;

  function automatic ref_t ref_decode(input logic [N-1:0] r, input int m,
                                      input int l1, input int l2);
    ref_t res;
    logic [NK-1:0] s = syn(r);
    int L;
    res.e = '0; res.nb = 0; res.ab = 0; res.steps = 1; res.a = 0; res.l = 0;
    if (s == '0) return res;
    res.steps = 2;
    for (int c = 0; c < int'(N); c++)
      for (int len = 1; len <= l1 && c + len <= int'(N); len++)
        if (syn(burst(c, len)) == s) begin
          res.e = burst(c, len); res.nb = 1; return res;
        end
    L = (m == 2) ? ((l1 < l2) ? l1 : l2) : 0;
    for (int l = 1; l <= L && l + 3 <= int'(N); l++)
      for (int a = 0; a <= int'(N) - l - 2; a++) begin
        logic [N-1:0] f = burst(a, l);
        res.steps++;
        for (int c = a + l + 1; c < int'(N); c++)
          for (int len = 1; len <= l2 && c + len <= int'(N); len++)
            if ((syn(f) ^ syn(burst(c, len))) == s) begin
              res.e = f | burst(c, len); res.nb = 2; res.a = a; res.l = l;
              return res;
            end
      end
    res.ab = 1;
    return res;
  endfunction

  // ---------------------------------------------------------------- stimulus
  int n_codeword = 0, n_single = 0, n_double_slide = 0, n_double_reload = 0;
  int n_abandon = 0, n_m1 = 0, n_stall = 0, n_hreload = 0;

  task automatic load_h();
    for (int j = 0; j < int'(N); j++)
      H[j] = (j < int'(K)) ? NK'($urandom) : (NK'(1) << (j - K));
    @(negedge clk);
    h_in = H; h_load = 1'b1;
    @(negedge clk);
    h_load = 1'b0;
    while (!h_ready) @(negedge clk);
  endtask

  function automatic logic [N-1:0] random_codeword();
    logic [N-1:0] c = '0;
    logic [NK-1:0] p = '0;
    for (int j = 0; j < int'(K); j++) begin
      c[j] = 1'($urandom);
      if (c[j]) p ^= H[j];
    end
    for (int i = 0; i < int'(NK); i++) c[K+i] = p[i];
    return c;
  endfunction

  task automatic decode(input logic [N-1:0] r, input int m, input int l1, input int l2,
                        input int hold);
    ref_t   exp;
    int     lat;
    exp = ref_decode(r, m, l1, l2);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    r_in = r; cfg_m = 2'(m); cfg_l1 = LW'(l1); cfg_l2 = LW'(l2); in_valid = 1'b1;
    @(negedge clk);                   // acceptance edge has passed
    in_valid = 1'b0; r_in = ~r;       // the decoder must keep its own copy
    lat = 0;
    while (!out_valid) begin
      @(negedge clk);
      lat++;
    end
    repeat (hold) begin              // hold the result: it must not move
      check(out_valid, "out_valid dropped while stalled");
      n_stall++;
      @(negedge clk);
    end
    check(u_hat == (r ^ exp.e), $sformatf("u_hat r=%h got %h exp %h", r, u_hat, r ^ exp.e));
    check(int'(n_bursts) == exp.nb, $sformatf("n_bursts got %0d exp %0d", n_bursts, exp.nb));
    check(abandon == exp.ab, "abandon flag");
    check(int'(steps) == exp.steps, $sformatf("steps got %0d exp %0d", steps, exp.steps));
    check(lat == exp.steps, $sformatf("latency %0d exp %0d", lat, exp.steps));
    if (exp.ab) begin
      int L = (m == 2) ? ((l1 < l2) ? l1 : l2) : 0;
      check(exp.steps == int'(wc_steps(N, L)), "abandon after worst-case step count");
      n_abandon++;
    end
    if (m == 1) n_m1++;
    if (exp.nb == 0) n_codeword++;
    if (exp.nb == 1) n_single++;
    if (exp.nb == 2 && exp.a > 0) n_double_slide++;
    if (exp.nb == 2 && exp.a == 0 && exp.l > 1) n_double_reload++;
    out_ready = 1'b1;
    @(negedge clk);
    out_ready = 1'b0;
  endtask

  initial begin
    logic [N-1:0] c, r;
    int kind, s1, l1b, s2, l2b, m, pl1, pl2;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_h();
    // paper's worst case of eq. (2) for n = 128, l1 = l2 = 32
    check(wc_steps(128, 32) == 3538, "wc_steps(128,32) == 3538");
    check(wc_steps(79, 0) == 2, "wc_steps(79,0) == 2");
    for (int w = 0; w < int'(NWORDS); w++) begin
      if (w == NWORDS / 2) begin load_h(); n_hreload++; end
      c = random_codeword();
      kind = $urandom_range(0, 9);
      m = 2; pl1 = LMAX; pl2 = LMAX;
      if (w % 7 == 3) begin pl1 = $urandom_range(1, LMAX); pl2 = $urandom_range(1, LMAX); end
      if (w % 11 == 5) begin m = 1; pl2 = 0; end
      r = c;
      if (kind == 1 || kind == 2) begin
        l1b = $urandom_range(1, LMAX);
        s1  = $urandom_range(0, N - l1b);
        r   = c ^ burst(s1, l1b);
      end else if (kind >= 3 && kind <= 7) begin
        l1b = (kind == 3) ? $urandom_range(2, 4) : $urandom_range(1, 4);
        s1  = (kind == 3) ? 0 : $urandom_range(0, N / 2);
        l2b = $urandom_range(1, 6);
        s2  = $urandom_range(s1 + l1b + 1, N - 1);
        if (s2 + l2b > int'(N)) l2b = N - s2;
        r = c ^ burst(s1, l1b) ^ burst(s2, l2b);
      end else if (kind >= 8) begin
        r = c ^ N'({$urandom, $urandom});
      end
      decode(r, m, pl1, pl2, (w % 5 == 0) ? 3 : 0);
    end
    $display("codeword=%0d single=%0d double_slide=%0d double_reload=%0d abandon=%0d m1=%0d stall=%0d h_reload=%0d",
             n_codeword, n_single, n_double_slide, n_double_reload, n_abandon, n_m1, n_stall, n_hreload);
    check(n_codeword > 0, "codeword exit happened");
    check(n_single > 0, "single-burst hit happened");
    check(n_double_slide > 0, "two-burst hit after shift by one happened");
    check(n_double_reload > 0, "two-burst hit after reset-and-shift happened");
    check(n_abandon > 0, "abandon happened");
    check(n_m1 > 0, "m = 1 decoding happened");
    check(n_stall > 0, "output stall happened");
    check(n_hreload > 0, "H reload happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
