// tb_grand_mo_fig_order -- the decoder against the worked example of the
// query order: n = 6, m = 2, l1 = 4, l2 = 3.
//
// With H = identity (n-k = n = 6) every error pattern has its own syndrome,
// so decoding r = pattern finds exactly that pattern, and the number of time
// steps shows in which step the hardware checks it. The table below lists
// the 51 patterns of the example in query order, one per line as the set of
// flipped bits (bit 1 = LSB here is bit index 0), grouped by time step: step
// 1 checks all single bursts of up to 4 bits; steps 2..5 use a one-bit first
// burst at bits 1..4; steps 6..8 a two-bit first burst; steps 9..10 a
// three-bit first burst. The decoder's step count includes the syndrome
// check, so a pattern of example step t must take t+1 cycles. Every one of
// the 63 non-zero words is decoded; the 12 that are not in the table must be
// abandoned after the full 11 cycles.
module tb_grand_mo_fig_order;
  import grand_mo_pkg::*;

  localparam int unsigned N    = 6;
  localparam int unsigned NK   = 6;
  localparam int unsigned LMAX = 4;
  localparam int unsigned LW   = $clog2(LMAX + 1);

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 h_load = 1'b0;
  logic [N-1:0][NK-1:0] h_in = '0;
  logic                 h_ready;
  logic [1:0]           cfg_m = 2'd2;
  logic [LW-1:0]        cfg_l1 = LW'(4);
  logic [LW-1:0]        cfg_l2 = LW'(3);
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Example patterns: {time step, flipped bits as a mask, bit 1 = LSB}.
  typedef struct { int step; logic [5:0] mask; } pat_t;
  pat_t pats[51] = '{
    // step 1: single bursts
    '{1, 6'b000001}, '{1, 6'b000011}, '{1, 6'b000111}, '{1, 6'b001111},
    '{1, 6'b000010}, '{1, 6'b000110}, '{1, 6'b001110}, '{1, 6'b011110},
    '{1, 6'b000100}, '{1, 6'b001100}, '{1, 6'b011100}, '{1, 6'b111100},
    '{1, 6'b001000}, '{1, 6'b011000}, '{1, 6'b111000},
    '{1, 6'b010000}, '{1, 6'b110000}, '{1, 6'b100000},
    // step 2: first burst {1}
    '{2, 6'b000101}, '{2, 6'b001101}, '{2, 6'b011101}, '{2, 6'b001001},
    '{2, 6'b011001}, '{2, 6'b111001}, '{2, 6'b010001}, '{2, 6'b110001},
    '{2, 6'b100001},
    // step 3: first burst {2}
    '{3, 6'b001010}, '{3, 6'b011010}, '{3, 6'b111010}, '{3, 6'b010010},
    '{3, 6'b110010}, '{3, 6'b100010},
    // step 4: first burst {3}
    '{4, 6'b010100}, '{4, 6'b110100}, '{4, 6'b100100},
    // step 5: first burst {4}
    '{5, 6'b101000},
    // step 6: first burst {1,2}
    '{6, 6'b001011}, '{6, 6'b011011}, '{6, 6'b111011}, '{6, 6'b010011},
    '{6, 6'b110011}, '{6, 6'b100011},
    // step 7: first burst {2,3}
    '{7, 6'b010110}, '{7, 6'b110110}, '{7, 6'b100110},
    // step 8: first burst {3,4}
    '{8, 6'b101100},
    // step 9: first burst {1,2,3}
    '{9, 6'b010111}, '{9, 6'b110111}, '{9, 6'b100111},
    // step 10: first burst {2,3,4}
    '{10, 6'b101110}
  };

  task automatic decode(input logic [N-1:0] r, output int lat);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    r_in = r; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    lat = 0;
    while (!out_valid) begin @(negedge clk); lat++; end
  endtask

  initial begin
    int lat, idx, found_cnt;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < int'(N); j++) h_in[j] = NK'(1) << j;   // H = I
    @(negedge clk);
    h_load = 1'b1;
    @(negedge clk);
    h_load = 1'b0;
    while (!h_ready) @(negedge clk);
    // the table is in query order: steps never decrease
    for (int i = 1; i < 51; i++) check(pats[i].step >= pats[i-1].step, "table order");
    check(wc_steps(6, 3) == 11, "11 time steps for n=6, L=3");
    found_cnt = 0;
    for (int w = 1; w < 64; w++) begin
      idx = -1;
      for (int i = 0; i < 51; i++) if (pats[i].mask == 6'(w)) idx = i;
      decode(N'(w), lat);
      if (idx >= 0) begin
        found_cnt++;
        check(!abandon && u_hat == '0, $sformatf("pattern %b decoded", 6'(w)));
        check(lat == pats[idx].step + 1 && int'(steps) == lat,
              $sformatf("pattern %b in step %0d, took %0d cycles", 6'(w), pats[idx].step, lat));
      end else begin
        check(abandon && u_hat == N'(w), $sformatf("pattern %b abandoned", 6'(w)));
        check(lat == 11, $sformatf("abandon after 11 cycles, took %0d", lat));
      end
      out_ready = 1'b1;
      @(negedge clk);
      out_ready = 1'b0;
    end
    check(found_cnt == 51, "51 patterns found");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
