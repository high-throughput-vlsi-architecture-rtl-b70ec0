// grand_mo_controller -- schedules the time steps of the GRAND-MO query order
// and turns a hit into the list of flipped bit indices.
//
// One received word is decoded as a sequence of time steps, one per clock
// cycle (no pipelining):
//   1. CHECK: if the syndrome s_c of r is zero, r is a codeword (0 bursts).
//   2. the m = 1 step: s_comp = s_c, shift register loaded unshifted; every
//      single burst of length <= l1 is checked at once.
//   3. m = 2 steps (only when m = 2): for each first-burst length
//      l = 1 .. L, L = min(l1, l2), and each first-burst start a = 0 .. n-l-2
//      (bits counted from 0), s_comp = s_c ^ s_{a+1,...,a+l} =
//      s_c ^ cum[a] ^ cum[a+l]. The first step of a length "resets" the shift
//      register and shifts it up by l+1; every further step shifts it up by
//      one. The core then checks every second burst of length <= l2 that
//      starts at least one bit after the first.
// When no step hits, the word is abandoned. The worst case is
// L*(2n-L-3)/2 + 2 steps (grand_mo_pkg::wc_steps), 3538 for n = 128,
// l1 = l2 = 32. The step order, the s_comp values and this count are the
// paper's; the state machine, the handshakes, the run-time configuration
// inputs and the choice of l2 as the limit of the second burst are this
// design's own.
//
// Interface: a word is accepted on in_valid && in_ready (in_ready needs the H
// memory to be ready); s_c_in and cfg_* are sampled then. `steps` counts the
// time steps used; it is final when out_valid rises, which happens `steps`
// cycles after acceptance. The result (ind/ind_valid, n_bursts, abandon)
// is held until out_ready. ind holds up to MMAX*LMAX bit indices: entries
// 0..LMAX-1 the first burst of an m = 2 pattern, entries LMAX.. the burst
// found by the core.
module grand_mo_controller
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
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration, sampled when a word is accepted
  input  logic [1:0]              cfg_m,
  input  logic [LW-1:0]           cfg_l1,
  input  logic [LW-1:0]           cfg_l2,
  // received word
  input  logic                    h_ready,
  input  logic                    in_valid,
  output logic                    in_ready,
  output logic                    accept,
  input  logic [NK-1:0]           s_c_in,
  // cumulative syndromes from the H memory
  input  logic [N:0][NK-1:0]      cum,
  // decoder core
  output logic                    core_load,
  output logic [SW-1:0]           core_load_shift,
  output logic                    core_shift1,
  output logic [NK-1:0]           s_comp,
  output logic [LW-1:0]           core_lim,
  input  logic                    core_found,
  input  logic [IW-1:0]           core_hit_col,
  input  logic [IW-1:0]           core_hit_row,
  // result
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [NIND-1:0][IW-1:0] ind,
  output logic [NIND-1:0]         ind_valid,
  output logic [1:0]              n_bursts,
  output logic                    abandon,
  output logic [31:0]             steps
);

  state_e        state;
  logic [NK-1:0] sc;
  logic [1:0]    m_q;
  logic [LW-1:0] l1_q, l2_q;
  logic [LW-1:0] l;      // first-burst length of the current step, 0: m = 1 step
  logic [IW-1:0] a;      // first-burst start of the current step

  int unsigned lmin, lim1, lim2, shift_now, a_last, hit_start, hit_end;

  always_comb begin
    lim1 = (int'(l1_q) > int'(LMAX)) ? LMAX : int'(l1_q);
    lim2 = (int'(l2_q) > int'(LMAX)) ? LMAX : int'(l2_q);
    lmin = (m_q == 2'd2) ? ((lim1 < lim2) ? lim1 : lim2) : 0;
    shift_now = (l == '0) ? 0 : int'(a) + int'(l) + 1;
    a_last    = (int'(N) >= int'(l) + 2) ? int'(N) - int'(l) - 2 : 0;
    hit_start = shift_now + int'(core_hit_col);
    hit_end   = shift_now + int'(core_hit_row);
  end

  assign in_ready  = (state == ST_IDLE) && h_ready;
  assign accept    = in_valid && in_ready;
  assign out_valid = (state == ST_DONE);
  assign s_comp    = (l == '0) ? sc : (sc ^ cum[a] ^ cum[int'(a) + int'(l)]);
  assign core_lim  = (l == '0) ? LW'(lim1) : LW'(lim2);

  // What the step after this one is.
  logic step_more_a, step_next_l;
  always_comb begin
    step_more_a = (l != '0) && (int'(a) + 1 <= int'(a_last));
    step_next_l = (int'(l) + 1 <= int'(lmin)) && (int'(l) + 3 <= int'(N));
  end

  always_comb begin
    core_load       = 1'b0;
    core_load_shift = '0;
    core_shift1     = 1'b0;
    if (state == ST_CHECK && sc != '0) begin
      core_load = 1'b1;                          // m = 1: unshifted
    end else if (state == ST_STEP && !core_found) begin
      if (step_more_a) begin
        core_shift1 = 1'b1;                      // next first-burst start
      end else if (step_next_l) begin
        core_load       = 1'b1;                  // reset, shift up by l+1
        core_load_shift = SW'(int'(l) + 2);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      sc        <= '0;
      m_q       <= '0;
      l1_q      <= '0;
      l2_q      <= '0;
      l         <= '0;
      a         <= '0;
      ind       <= '0;
      ind_valid <= '0;
      n_bursts  <= '0;
      abandon   <= 1'b0;
      steps     <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (accept) begin
          state     <= ST_CHECK;
          sc        <= s_c_in;
          m_q       <= cfg_m;
          l1_q      <= cfg_l1;
          l2_q      <= cfg_l2;
          l         <= '0;
          a         <= '0;
          ind_valid <= '0;
          n_bursts  <= '0;
          abandon   <= 1'b0;
          steps     <= '0;
        end
        ST_CHECK: begin
          steps <= steps + 1;
          if (sc == '0) state <= ST_DONE;
          else          state <= ST_STEP;
        end
        ST_STEP: begin
          steps <= steps + 1;
          if (core_found) begin
            state <= ST_DONE;
            for (int k = 0; k < int'(LMAX); k++) begin
              ind[k]            <= IW'(int'(a) + k);
              ind_valid[k]      <= (k < int'(l));
              ind[LMAX+k]       <= IW'(hit_start + k);
              ind_valid[LMAX+k] <= (hit_start + k <= hit_end);
            end
            n_bursts <= (l == '0) ? 2'd1 : 2'd2;
          end else if (step_more_a) begin
            a <= a + 1'b1;
          end else if (step_next_l) begin
            l <= l + 1'b1;
            a <= '0;
          end else begin
            state   <= ST_DONE;
            abandon <= 1'b1;
          end
        end
        ST_DONE: if (out_ready) state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  // The result must stay put while it waits to be taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(ind_valid) && $stable(abandon));
  // Only one shift-register command per cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(core_load && core_shift1));

endmodule
