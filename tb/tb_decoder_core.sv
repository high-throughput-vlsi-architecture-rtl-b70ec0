// tb_decoder_core -- checks the decoder core's shift register, XOR
// interconnect, NOR-reduce and priority encoder against a direct model.
//
// A random H gives the cumulative syndromes. The core is loaded with a shift
// sh, then shifted up by one a few times; in every cycle s_comp is set to the
// syndrome of a chosen burst (so that hits occur), optionally xor-ed with the
// syndrome of another burst or with noise. The model walks every burst
// start c and length d+1 <= lim with sh+c+d <= n-1 in query order (column,
// then length), XORs columns of H directly and compares the first match with
// found / hit_col / hit_row. Uses n = 24, n-k = 10, LMAX = 5.
module tb_decoder_core;
  localparam int unsigned N    = 24;
  localparam int unsigned NK   = 10;
  localparam int unsigned LMAX = 5;
  localparam int unsigned IW   = $clog2(N);
  localparam int unsigned SW   = $clog2(N + 1);
  localparam int unsigned LW   = $clog2(LMAX + 1);

  logic                clk = 1'b0, rst_n = 1'b0;
  logic [N:0][NK-1:0]  cum;
  logic                load = 1'b0, shift1 = 1'b0;
  logic [SW-1:0]       load_shift = '0;
  logic [NK-1:0]       s_comp = '0;
  logic [LW-1:0]       lim = '0;
  logic                found;
  logic [IW-1:0]       hit_col, hit_row;

  decoder_core #(.N(N), .NK(NK), .LMAX(LMAX)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, hits = 0, misses = 0;
  logic [N-1:0][NK-1:0] H;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NK-1:0] bs(input int start, input int len);
    logic [NK-1:0] v = '0;
    for (int j = start; j < start + len; j++) v ^= H[j];
    return v;
  endfunction

  task automatic compare(input int sh);
    bit ef = 0; int ec = 0, er = 0;
    for (int c = 0; c < int'(N) && !ef; c++)
      for (int d = 0; d < int'(lim) && !ef; d++)
        if (sh + c + d <= int'(N) - 1 && d < int'(LMAX))
          if ((s_comp ^ bs(sh + c, d + 1)) == '0) begin ef = 1; ec = c; er = c + d; end
    #1;
    checks++;
    if (found != ef || (ef && (int'(hit_col) != ec || int'(hit_row) != er))) begin
      failures++;
      if (failures < 10)
        $display("FAIL sh=%0d lim=%0d: got %0d %0d %0d exp %0d %0d %0d",
                 sh, lim, found, hit_col, hit_row, ef, ec, er);
    end
    if (ef) hits++; else misses++;
  endtask

  initial begin
    int sh, st, ln;
    for (int j = 0; j < int'(N); j++) H[j] = NK'($urandom);
    cum[0] = '0;
    for (int j = 1; j <= int'(N); j++) cum[j] = cum[j-1] ^ H[j-1];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      // load with a shift the schedule uses: 0 or 2 .. LMAX+1
      sh = (t % 3 == 0) ? 0 : $urandom_range(2, LMAX + 1);
      load = 1'b1; load_shift = SW'(sh);
      @(negedge clk);
      load = 1'b0;
      for (int step = 0; step < 6; step++) begin
        lim = LW'($urandom_range(1, LMAX));
        st  = $urandom_range(sh, N - 1);
        ln  = $urandom_range(1, LMAX);
        if (st + ln > int'(N)) ln = N - st;
        case ($urandom_range(0, 3))
          0: s_comp = bs(st, ln);
          1: s_comp = bs(st, ln) ^ bs($urandom_range(0, 3), 2);
          2: s_comp = NK'($urandom);
          default: s_comp = bs(st, ln);
        endcase
        compare(sh);
        if (sh < int'(N) - 1) begin
          shift1 = 1'b1;
          @(negedge clk);
          shift1 = 1'b0;
          sh++;
        end else @(negedge clk);
      end
    end
    $display("hits=%0d misses=%0d", hits, misses);
    checks++;
    if (hits == 0 || misses == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
