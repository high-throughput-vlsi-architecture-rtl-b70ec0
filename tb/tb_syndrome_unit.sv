// tb_syndrome_unit -- checks s = H * r^T against a row-by-row computation:
// syndrome bit i is the parity of (row i of H) AND r. Random matrices and
// words, plus the all-zero word and single-bit words.
module tb_syndrome_unit;
  localparam int unsigned N  = 128;
  localparam int unsigned NK = 32;

  logic [N-1:0][NK-1:0] h_cols;
  logic [N-1:0]         r;
  logic [NK-1:0]        s;

  syndrome_unit #(.N(N), .NK(NK)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NK-1:0] ref_syn(input logic [N-1:0] v);
    logic [NK-1:0] res;
    for (int i = 0; i < int'(NK); i++) begin
      logic [N-1:0] row;
      for (int j = 0; j < int'(N); j++) row[j] = h_cols[j][i];
      res[i] = ^(row & v);
    end
    return res;
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < int'(N); j++) h_cols[j] = NK'($urandom);
      case (t % 4)
        0:       r = '0;
        1:       r = N'(1) << $urandom_range(0, N - 1);
        default: r = {$urandom, $urandom, $urandom, $urandom};
      endcase
      #1;
      checks++;
      if (s != ref_syn(r)) begin
        failures++;
        $display("FAIL: t=%0d s=%h exp %h", t, s, ref_syn(r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
