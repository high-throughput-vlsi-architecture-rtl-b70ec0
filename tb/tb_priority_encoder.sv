// tb_priority_encoder -- checks the tree priority encoder at two widths: 37
// inputs (not a power of two) and 4096 inputs (the decoder core's width at
// the default n = 128, LMAX = 32). Each random vector, with 0 to 3 bits set,
// is compared with a linear scan for the lowest set bit; the all-zero
// vector must give found = 0 and index 0.
module tb_priority_encoder;
  localparam int unsigned WA = 37;
  localparam int unsigned WB = 4096;

  logic [WA-1:0]         in_a;
  logic [WB-1:0]         in_b;
  logic                  found_a, found_b;
  logic [$clog2(WA)-1:0] idx_a;
  logic [$clog2(WB)-1:0] idx_b;

  priority_encoder #(.W(WA)) dut_a (.in(in_a), .found(found_a), .idx(idx_a));
  priority_encoder #(.W(WB)) dut_b (.in(in_b), .found(found_b), .idx(idx_b));

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea, eb;
    for (int t = 0; t < 400; t++) begin
      in_a = '0; in_b = '0;
      for (int k = 0; k < t % 4; k++) begin
        in_a[$urandom_range(0, WA - 1)] = 1'b1;
        in_b[$urandom_range(0, WB - 1)] = 1'b1;
      end
      #1;
      ea = -1; eb = -1;
      for (int i = int'(WA) - 1; i >= 0; i--) if (in_a[i]) ea = i;
      for (int i = int'(WB) - 1; i >= 0; i--) if (in_b[i]) eb = i;
      checks += 2;
      if (found_a != (ea >= 0) || int'(idx_a) != ((ea >= 0) ? ea : 0)) begin
        failures++; $display("FAIL W=%0d got %0d/%0d exp %0d", WA, found_a, idx_a, ea);
      end
      if (found_b != (eb >= 0) || int'(idx_b) != ((eb >= 0) ? eb : 0)) begin
        failures++; $display("FAIL W=%0d got %0d/%0d exp %0d", WB, found_b, idx_b, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
