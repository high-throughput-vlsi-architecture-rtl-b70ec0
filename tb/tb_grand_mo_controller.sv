// tb_grand_mo_controller -- checks the controller's schedule on its own, with
// the decoder core replaced by the testbench.
//
// For each word the testbench lists the expected time steps itself -- the
// syndrome check, the m = 1 step, then first-burst length l = 1..min(l1,l2)
// and start a = 0..n-l-2 -- and checks in every step: s_comp (s_c xor the
// first burst's syndrome, from the columns of H), the limit passed to the
// core (l1 for the m = 1 step, l2 after), and the shift-register command
// issued for the following step (load with shift 0, shift by one, or load
// with shift l+1 for a new length). The core's found signal is raised at a
// random step (or never), and the index list, n_bursts, abandon and the step
// count are checked. Without a hit the count must be L*(2n-L-3)/2 + 2.
module tb_grand_mo_controller;
  import grand_mo_pkg::*;
  localparam int unsigned N    = 14;
  localparam int unsigned NK   = 8;
  localparam int unsigned LMAX = 4;
  localparam int unsigned IW   = $clog2(N);
  localparam int unsigned SW   = $clog2(N + 1);
  localparam int unsigned LW   = $clog2(LMAX + 1);
  localparam int unsigned NIND = MMAX * LMAX;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0]  cfg_m = 2'd2;
  logic [LW-1:0] cfg_l1 = '0, cfg_l2 = '0;
  logic h_ready = 1'b1, in_valid = 1'b0, in_ready, accept;
  logic [NK-1:0] s_c_in = '0;
  logic [N:0][NK-1:0] cum;
  logic core_load, core_shift1;
  logic [SW-1:0] core_load_shift;
  logic [NK-1:0] s_comp;
  logic [LW-1:0] core_lim;
  logic core_found = 1'b0;
  logic [IW-1:0] core_hit_col = '0, core_hit_row = '0;
  logic out_valid, out_ready = 1'b0;
  logic [NIND-1:0][IW-1:0] ind;
  logic [NIND-1:0] ind_valid;
  logic [1:0] n_bursts;
  logic abandon;
  logic [31:0] steps;

  grand_mo_controller #(.N(N), .NK(NK), .LMAX(LMAX)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [N-1:0][NK-1:0] H;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic logic [NK-1:0] bs(input int start, input int len);
    logic [NK-1:0] v = '0;
    for (int j = start; j < start + len; j++) v ^= H[j];
    return v;
  endfunction

  initial begin
    int sl[$], sa[$];      // expected steps: first-burst length and start
    int m, l1, l2, L, hit_at, hc, hr, sh, nsteps;
    logic [NK-1:0] sc;
    logic [N-1:0] exp_bits, got_bits;
    for (int j = 0; j < int'(N); j++) H[j] = NK'($urandom);
    cum[0] = '0;
    for (int j = 1; j <= int'(N); j++) cum[j] = cum[j-1] ^ H[j-1];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 60; w++) begin
      m  = (w % 4 == 1) ? 1 : 2;
      l1 = $urandom_range(1, LMAX);
      l2 = (m == 1) ? 0 : $urandom_range(1, LMAX);
      L  = (m == 2) ? ((l1 < l2) ? l1 : l2) : 0;
      sc = (w % 10 == 0) ? '0 : NK'($urandom_range(1, 255));
      sl.delete(); sa.delete();
      if (sc != '0) begin
        sl.push_back(0); sa.push_back(0);
        for (int l = 1; l <= L; l++)
          for (int a = 0; a <= int'(N) - l - 2; a++) begin sl.push_back(l); sa.push_back(a); end
      end
      hit_at = (w % 3 == 0) ? -1 : $urandom_range(0, (sl.size() > 0) ? sl.size() - 1 : 0);
      // present the word
      check(in_ready, "in_ready when idle");
      in_valid = 1'b1; s_c_in = sc; cfg_m = 2'(m); cfg_l1 = LW'(l1); cfg_l2 = LW'(l2);
      @(negedge clk);
      in_valid = 1'b0; s_c_in = ~sc;
      // CHECK step
      check(!out_valid, "busy in check");
      if (sc != '0) check(core_load && int'(core_load_shift) == 0 && !core_shift1,
                          "load with shift 0 after the check");
      else          check(!core_load && !core_shift1, "no command for a codeword");
      @(negedge clk);
      nsteps = 1;
      for (int i = 0; i < sl.size(); i++) begin
        sh = (sl[i] == 0) ? 0 : sa[i] + sl[i] + 1;
        check(!out_valid, "busy in a step");
        check(s_comp == (sc ^ ((sl[i] == 0) ? NK'(0) : bs(sa[i], sl[i]))),
              $sformatf("s_comp at l=%0d a=%0d", sl[i], sa[i]));
        check(int'(core_lim) == ((sl[i] == 0) ? l1 : l2), "length limit");
        if (i == hit_at) begin
          hc = $urandom_range(0, N - 1 - sh);
          hr = $urandom_range(hc, ((hc + LMAX - 1 < N - 1 - sh) ? hc + LMAX - 1 : N - 1 - sh));
          core_found = 1'b1; core_hit_col = IW'(hc); core_hit_row = IW'(hr);
          #1;
          check(!core_load && !core_shift1, "no command on a hit");
          @(negedge clk);
          core_found = 1'b0;
          nsteps++;
          break;
        end
        if (i + 1 < sl.size()) begin
          if (sl[i+1] == sl[i]) check(core_shift1 && !core_load, "shift by one");
          else check(core_load && !core_shift1 && int'(core_load_shift) == sl[i+1] + 1,
                     $sformatf("reset and shift by %0d", sl[i+1] + 1));
        end else check(!core_load && !core_shift1, "no command after the last step");
        @(negedge clk);
        nsteps++;
      end
      check(out_valid, "out_valid after the last step");
      check(int'(steps) == nsteps, $sformatf("steps %0d exp %0d", steps, nsteps));
      if (sc == '0) begin
        check(n_bursts == 2'd0 && !abandon && ind_valid == '0, "codeword result");
      end else if (hit_at < 0) begin
        check(abandon, "abandon");
        check(int'(steps) == int'(wc_steps(N, L)), "worst-case step count");
      end else begin
        check(!abandon, "no abandon on a hit");
        check(int'(n_bursts) == ((sl[hit_at] == 0) ? 1 : 2), "n_bursts");
        exp_bits = '0;
        for (int k = 0; k < sl[hit_at]; k++) exp_bits[sa[hit_at] + k] = 1'b1;
        for (int k = hc; k <= hr; k++) exp_bits[sh + k] = 1'b1;
        got_bits = '0;
        for (int k = 0; k < int'(NIND); k++) if (ind_valid[k]) got_bits[ind[k]] = 1'b1;
        check(got_bits == exp_bits, $sformatf("bit list %b exp %b", got_bits, exp_bits));
      end
      // hold the result one cycle, then take it
      @(negedge clk);
      check(out_valid, "result held");
      out_ready = 1'b1;
      @(negedge clk);
      out_ready = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
