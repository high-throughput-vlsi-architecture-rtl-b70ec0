// decoder_core -- shift register of burst syndromes, XOR interconnect,
// NOR-reduce and priority encoder of the GRAND-MO decoder.
//
// The shift register has n rows of n-k bits. Loaded with shift `sh`, row r
// holds the cumulative syndrome cum[sh+1+r] = s_{1,...,sh+1+r}; rows past n
// hold zero and are flagged invalid, so they never report a match. A further
// register `prev` holds cum[sh], the row just above row 0. Each time step
// every column c (0..n-1) forms x_c = s_comp ^ row(c-1) (row(-1) = prev), and
// every pair (c, r) with c <= r < c+LMAX forms the test syndrome
// x_c ^ row(r) = s_comp ^ (syndrome of the burst on bits sh+c .. sh+r,
// counting bits from 0). A test that is all zero (NOR-reduce) and whose burst
// length d+1 = r-c+1 is within `lim` is a hit. The priority encoder reports
// the first hit in query order: lowest column c, then shortest length,
// through a tree-shaped priority encoder (priority_encoder).
//
// This is the structure of the paper's figures: with sh = 0 and
// s_comp = s_c, one time step checks every single burst of length <= LMAX;
// after "reset and shift up by l+1" and s_comp = s_c ^ (first burst), it
// checks every second burst that starts at least one bit after the first.
// The wiring (column c to rows c..c+LMAX-1) is read from the n=6, l=4 example
// figure; the valid flag per row and the length limit `lim` are this
// design's additions so that zero rows and bursts longer than l2 are not
// reported.
//
// Commands (act at the clock edge): load with load_shift = sh (sh limited to
// 0..LMAX+1, the only loads the schedule needs), or shift1 (every row moves
// up by one, prev takes row 0, an invalid zero row enters at the bottom).
// found/hit_col/hit_len are combinational in the current register contents
// and s_comp: no pipelining, one time step per clock cycle.
module decoder_core #(
  parameter int unsigned N    = grand_mo_pkg::N_DEF,
  parameter int unsigned NK   = grand_mo_pkg::NK_DEF,
  parameter int unsigned LMAX = grand_mo_pkg::LMAX_DEF,
  localparam int unsigned IW  = $clog2(N),
  localparam int unsigned SW  = $clog2(N + 1),
  localparam int unsigned LW  = $clog2(LMAX + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N:0][NK-1:0]   cum,
  input  logic                 load,
  input  logic [SW-1:0]        load_shift,
  input  logic                 shift1,
  input  logic [NK-1:0]        s_comp,
  input  logic [LW-1:0]        lim,
  output logic                 found,
  output logic [IW-1:0]        hit_col,   // burst start, relative to the shift
  output logic [IW-1:0]        hit_row    // burst end, relative to the shift
);

  logic [N-1:0][NK-1:0] sr;
  logic [N-1:0]         sr_v;
  logic [NK-1:0]        prev;

  // ---------------------------------------------------------------- register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr   <= '0;
      sr_v <= '0;
      prev <= '0;
    end else if (load) begin
      for (int s = 0; s <= int'(LMAX) + 1; s++) begin
        if (int'(load_shift) == s) begin
          prev <= (s <= int'(N)) ? cum[s] : '0;
          for (int r = 0; r < int'(N); r++) begin
            if (s + 1 + r <= int'(N)) begin
              sr[r]   <= cum[s+1+r];
              sr_v[r] <= 1'b1;
            end else begin
              sr[r]   <= '0;
              sr_v[r] <= 1'b0;
            end
          end
        end
      end
    end else if (shift1) begin
      prev <= sr[0];
      for (int r = 0; r < int'(N) - 1; r++) begin
        sr[r]   <= sr[r+1];
        sr_v[r] <= sr_v[r+1];
      end
      sr[N-1]   <= '0;
      sr_v[N-1] <= 1'b0;
    end
  end

  // ------------------------------------------- XOR interconnect and NOR-reduce
  logic [N-1:0][NK-1:0]   colx;      // s_comp ^ row(c-1)
  logic [N-1:0][LMAX-1:0] hit;       // hit[c][d]: burst c .. c+d satisfies H

  always_comb begin
    for (int c = 0; c < int'(N); c++)
      colx[c] = s_comp ^ ((c == 0) ? prev : sr[(c == 0) ? 0 : c - 1]);
    hit = '0;
    for (int c = 0; c < int'(N); c++)
      for (int d = 0; d < int'(LMAX); d++)
        if (c + d < int'(N))
          hit[c][d] = sr_v[c+d] && (d < int'(lim)) && ~|(colx[c] ^ sr[c+d]);
  end

  // --------------------------------------------------------- priority encoder
  // hit[c][d] is laid out at c*LP + d (LP = LMAX rounded up to a power of
  // two), so the lowest set position is the first test in query order and
  // its index splits into column and length by bit slicing.
  localparam int unsigned LB = (LMAX > 1) ? $clog2(LMAX) : 1;
  localparam int unsigned LP = 1 << LB;
  localparam int unsigned PW = N * LP;

  logic [PW-1:0]         flat;
  logic [$clog2(PW)-1:0] pidx;
  logic [IW-1:0]         pc;
  logic [LB-1:0]         pd;

  always_comb begin
    flat = '0;
    for (int c = 0; c < int'(N); c++)
      for (int d = 0; d < int'(LMAX); d++)
        flat[c*LP + d] = hit[c][d];
  end

  priority_encoder #(.W(PW)) u_penc (.in(flat), .found, .idx(pidx));

  assign {pc, pd}  = pidx;
  assign hit_col   = pc;
  assign hit_row   = pc + IW'(pd);

endmodule
