// tb_word_generator -- checks that the word generator sets exactly the bits
// named by the valid index entries and outputs u_hat = r xor e. Random index
// lists (with repeated and invalid entries), an empty list and a full burst.
module tb_word_generator;
  localparam int unsigned N    = 79;
  localparam int unsigned NIND = 32;
  localparam int unsigned IW   = $clog2(N);

  logic [N-1:0]            r, e, u_hat;
  logic [NIND-1:0][IW-1:0] ind;
  logic [NIND-1:0]         ind_valid;

  word_generator #(.N(N), .NIND(NIND)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp_e;
    int start;
    for (int t = 0; t < 300; t++) begin
      r = N'({$urandom, $urandom, $urandom});
      exp_e = '0;
      if (t % 3 == 0) begin               // one burst of consecutive bits
        start = $urandom_range(0, N - NIND);
        for (int k = 0; k < int'(NIND); k++) begin
          ind[k]       = IW'(start + k);
          ind_valid[k] = (k < t % 17);
          if (ind_valid[k]) exp_e[start+k] = 1'b1;
        end
      end else begin
        for (int k = 0; k < int'(NIND); k++) begin
          ind[k]       = IW'($urandom_range(0, N - 1));
          ind_valid[k] = (t % 3 == 1) ? 1'($urandom) : 1'b0;
          if (ind_valid[k]) exp_e[ind[k]] = 1'b1;
        end
      end
      #1;
      checks += 2;
      if (e != exp_e)         begin failures++; $display("FAIL e t=%0d", t); end
      if (u_hat != (r ^ exp_e)) begin failures++; $display("FAIL u_hat t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
