// grand_mo_top -- GRAND-MO (GRAND Markov Order) hard-input decoder.
//
// Wiring of the architecture: the H memory feeds the syndrome unit (s_c of
// the received word r) and the decoder core (cumulative burst syndromes);
// the controller steps through the query order, driving s_comp and the
// shift-register commands of the core, and passes the indices of the found
// pattern to the word generator, which outputs u_hat = r xor e. The received
// word is held in a register from acceptance until the result is taken.
//
// Interface: load H with h_load (one cycle, h_in[j] = column j); words are
// accepted on in_valid && in_ready, which waits for the H memory to finish.
// The result (u_hat, abandon, n_bursts, steps) is valid while out_valid is
// high and is taken with out_ready. cfg_m (1 or 2), cfg_l1 and cfg_l2 give
// the query-order parameters m, l1, l2 and are sampled per word. Latency:
// out_valid rises `steps` cycles after acceptance, at most
// L*(2n-L-3)/2 + 2 (L = min(l1,l2), 0 when m = 1). u_hat is the corrected
// n-bit codeword (r itself when abandoned); mapping it to the k message bits
// with G^-1 is left outside, as in the paper's block diagram.
module grand_mo_top
  import grand_mo_pkg::*;
#(
  parameter int unsigned N    = grand_mo_pkg::N_DEF,
  parameter int unsigned NK   = grand_mo_pkg::NK_DEF,
  parameter int unsigned LMAX = grand_mo_pkg::LMAX_DEF,
  localparam int unsigned IW  = $clog2(N),
  localparam int unsigned SW  = $clog2(N + 1),
  localparam int unsigned LW  = $clog2(LMAX + 1),
  localparam int unsigned NIND = MMAX * LMAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 h_load,
  input  logic [N-1:0][NK-1:0] h_in,
  output logic                 h_ready,
  input  logic [1:0]           cfg_m,
  input  logic [LW-1:0]        cfg_l1,
  input  logic [LW-1:0]        cfg_l2,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [N-1:0]         r_in,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [N-1:0]         u_hat,
  output logic                 abandon,
  output logic [1:0]           n_bursts,
  output logic [31:0]          steps
);

  logic [N-1:0][NK-1:0] h_cols;
  logic [N:0][NK-1:0]   cum;
  logic [NK-1:0]        s_c;
  logic [N-1:0]         r_q;
  logic                 accept;

  logic                 core_load, core_shift1, core_found;
  logic [SW-1:0]        core_load_shift;
  logic [NK-1:0]        s_comp;
  logic [LW-1:0]        core_lim;
  logic [IW-1:0]        core_hit_col, core_hit_row;

  logic [NIND-1:0][IW-1:0] ind;
  logic [NIND-1:0]         ind_valid;
  logic [N-1:0]            e;

  h_memory #(.N(N), .NK(NK)) u_hmem (
    .clk, .rst_n, .h_load, .h_in, .h_cols, .cum, .ready(h_ready)
  );

  syndrome_unit #(.N(N), .NK(NK)) u_synd (
    .h_cols, .r(r_in), .s(s_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      r_q <= '0;
    else if (accept) r_q <= r_in;
  end

  grand_mo_controller #(.N(N), .NK(NK), .LMAX(LMAX)) u_ctrl (
    .clk, .rst_n, .cfg_m, .cfg_l1, .cfg_l2,
    .h_ready, .in_valid, .in_ready, .accept, .s_c_in(s_c), .cum,
    .core_load, .core_load_shift, .core_shift1, .s_comp, .core_lim,
    .core_found, .core_hit_col, .core_hit_row,
    .out_valid, .out_ready, .ind, .ind_valid, .n_bursts, .abandon, .steps
  );

  decoder_core #(.N(N), .NK(NK), .LMAX(LMAX)) u_core (
    .clk, .rst_n, .cum,
    .load(core_load), .load_shift(core_load_shift), .shift1(core_shift1),
    .s_comp, .lim(core_lim),
    .found(core_found), .hit_col(core_hit_col), .hit_row(core_hit_row)
  );

  word_generator #(.N(N), .NIND(NIND)) u_wgen (
    .r(r_q), .ind, .ind_valid, .e, .u_hat
  );

  // H may only be reloaded while no word is being decoded.
  assert property (@(posedge clk) disable iff (!rst_n) h_load |-> in_ready || !h_ready);

endmodule
