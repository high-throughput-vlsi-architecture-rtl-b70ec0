// tb_h_memory -- checks the H memory: after a one-cycle load, ready must rise
// exactly n cycles later, the stored columns must equal the loaded ones and
// every cumulative syndrome cum[j] must equal the XOR of columns 0..j-1,
// computed here directly. Two loads with different matrices are checked.
module tb_h_memory;
  localparam int unsigned N  = 20;
  localparam int unsigned NK = 9;

  logic                 clk = 1'b0, rst_n = 1'b0, h_load = 1'b0;
  logic [N-1:0][NK-1:0] h_in = '0, h_cols;
  logic [N:0][NK-1:0]   cum;
  logic                 ready;

  h_memory #(.N(N), .NK(NK)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [NK-1:0] acc;
    int wait_cycles;
    repeat (2) @(negedge clk);
    check(!ready, "not ready after reset");
    rst_n = 1'b1;
    for (int load = 0; load < 3; load++) begin
      for (int j = 0; j < int'(N); j++) h_in[j] = NK'($urandom);
      h_load = 1'b1;
      @(negedge clk);
      h_load = 1'b0;
      check(!ready, "ready drops on load");
      wait_cycles = 0;   // edges after the load edge
      while (!ready && wait_cycles < 1000) begin @(negedge clk); wait_cycles++; end
      check(wait_cycles == int'(N), $sformatf("ready after %0d cycles, expected %0d", wait_cycles, N));
      check(h_cols == h_in, "stored columns");
      acc = '0;
      for (int j = 0; j <= int'(N); j++) begin
        check(cum[j] == acc, $sformatf("cum[%0d]", j));
        if (j < int'(N)) acc ^= h_in[j];
      end
      repeat (3) @(negedge clk);
      check(ready, "ready stays high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
