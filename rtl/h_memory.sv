// h_memory -- storage of the parity-check matrix H and of its cumulative
// burst syndromes.
//
// H is loaded in one cycle as n columns of n-k bits (column j is the syndrome
// s_j = H * 1_j^T of a single flip at bit j), as the n x (n-k) input of the
// architecture's H memory. Codes with fewer than NK parity bits are loaded
// with the unused rows of H set to zero. After a load the block spends n
// cycles forming the cumulative syndromes cum[j] = s_1 ^ s_2 ^ ... ^ s_j
// (cum[0] = 0), one per cycle, which are the rows s_{1,...,j} the decoder
// core's shift register is filled from; `ready` rises when they are complete.
// Storing H and loading it at any time follows the paper; forming the
// cumulative syndromes here, sequentially, is this design's choice.
//
// Timing: h_load at edge t captures h_in; ready is low from edge t until
// edge t+n, then high until the next h_load. Reset clears H and ready.
module h_memory #(
  parameter int unsigned N  = grand_mo_pkg::N_DEF,
  parameter int unsigned NK = grand_mo_pkg::NK_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    h_load,
  input  logic [N-1:0][NK-1:0]    h_in,
  output logic [N-1:0][NK-1:0]    h_cols,
  output logic [N:0][NK-1:0]      cum,
  output logic                    ready
);

  localparam int unsigned CW = $clog2(N + 1);

  logic [CW-1:0] cnt;
  logic          busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_cols <= '0;
      cum    <= '0;
      cnt    <= '0;
      busy   <= 1'b0;
      ready  <= 1'b0;
    end else if (h_load) begin
      h_cols <= h_in;
      cum    <= '0;
      cnt    <= '0;
      busy   <= 1'b1;
      ready  <= 1'b0;
    end else if (busy) begin
      cum[cnt+1] <= cum[cnt] ^ h_cols[cnt];
      cnt        <= cnt + 1'b1;
      if (cnt == CW'(N - 1)) begin
        busy  <= 1'b0;
        ready <= 1'b1;
      end
    end
  end

endmodule
