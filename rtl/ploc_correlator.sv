// ploc_correlator -- neighbourhood correlation of PLOC feature vectors.
//
// Stores the latest significance vector b'(m,n) of every cell (written from the
// accumulator's output stream). On start it sweeps all cells, one per clock,
// and evaluates for each cell the pairwise correlation with its eight N8
// neighbours over the feature subset k_mask:
//   A(i,j) = 1  if  |b' & b'(i,j) & K| / |(b' | b'(i,j)) & K| >= theta_corr
// and the cell result
//   b_korr = 1  if  sum over (i,j) of A(i,j) >= n_corr.
// The ratio test is done without division: inter * 2**THETA_W >= theta_corr *
// union. An empty union (neither cell has any selected feature) gives A = 0,
// and neighbour positions outside the image give A = 0; both are choices of
// this design, the paper does not say.
//
// After reset the map is zeroed (one cell per clock); start is accepted in the
// idle state only. Vector writes are accepted in every state except clearing,
// also during a sweep. Timing: one result per clock on k_valid/k_addr/k_bit,
// registered; done pulses with the last result.
module ploc_correlator #(
  parameter int unsigned ROWS    = ploc_pkg::DEF_ROWS,
  parameter int unsigned COLS    = ploc_pkg::DEF_COLS,
  parameter int unsigned NB      = ploc_pkg::DEF_NB,
  parameter int unsigned THETA_W = ploc_pkg::DEF_THETA_W,
  localparam int unsigned CELLS  = ROWS * COLS,
  localparam int unsigned AW     = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned NFEAT  = 1 << NB,
  localparam int unsigned PW     = $clog2(NFEAT + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               b_valid,
  input  logic [AW-1:0]      b_addr,
  input  logic [NFEAT-1:0]   b_vec,
  input  logic [NFEAT-1:0]   k_mask,
  input  logic [THETA_W-1:0] theta_corr,
  input  logic [3:0]         n_corr,
  input  logic               start,
  output logic               busy,
  output logic               k_valid,
  output logic [AW-1:0]      k_addr,
  output logic               k_bit,
  output logic               done
);
  import ploc_pkg::*;

  corr_state_t      state;
  logic [NFEAT-1:0] map [CELLS];
  logic [AW-1:0]    idx;
  int unsigned      row_i, col_i;
  logic [NFEAT-1:0] centre_vec, nb_vec;
  logic [3:0]       a_sum;
  logic             result;
  logic [PW-1:0]    inter, uni;

  function automatic logic [PW-1:0] popcount(logic [NFEAT-1:0] v);
    logic [PW-1:0] n = '0;
    for (int b = 0; b < NFEAT; b++) n = n + PW'(v[b]);
    return n;
  endfunction

  // Correlation of the cell at idx with its eight neighbours.
  always_comb begin
    row_i      = int'(idx) / COLS;
    col_i      = int'(idx) % COLS;
    centre_vec = map[idx] & k_mask;
    a_sum      = '0;
    for (int dr = -1; dr <= 1; dr++) begin
      for (int dc = -1; dc <= 1; dc++) begin
        int nr, nc;
        nr = int'(row_i) + dr;
        nc = int'(col_i) + dc;
        nb_vec = '0;
        inter  = '0;
        uni    = '0;
        if (!(dr == 0 && dc == 0) && nr >= 0 && nr < int'(ROWS) && nc >= 0 && nc < int'(COLS)) begin
          nb_vec = map[AW'(nr * int'(COLS) + nc)] & k_mask;
          inter  = popcount(centre_vec & nb_vec);
          uni    = popcount(centre_vec | nb_vec);
          if (uni != '0 &&
              ({inter, THETA_W'(0)} >= (PW + THETA_W)'(theta_corr) * (PW + THETA_W)'(uni)))
            a_sum = a_sum + 1'b1;
        end
      end
    end
    result = (a_sum >= n_corr);
  end

  assign busy = (state != CORR_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= CORR_CLEAR;
      idx     <= '0;
      k_valid <= 1'b0;
      k_addr  <= '0;
      k_bit   <= 1'b0;
      done    <= 1'b0;
    end else begin
      k_valid <= 1'b0;
      done    <= 1'b0;
      if (state == CORR_CLEAR) map[idx] <= '0;
      else if (b_valid)        map[b_addr] <= b_vec;
      case (state)
        CORR_CLEAR: begin
          idx <= idx + 1'b1;
          if (idx == AW'(CELLS - 1)) begin
            idx   <= '0;
            state <= CORR_IDLE;
          end
        end
        CORR_IDLE: if (start) state <= CORR_SWEEP;
        CORR_SWEEP: begin
          k_valid <= 1'b1;
          k_addr  <= idx;
          k_bit   <= result;
          idx     <= idx + 1'b1;
          if (idx == AW'(CELLS - 1)) begin
            idx   <= '0;
            done  <= 1'b1;
            state <= CORR_IDLE;
          end
        end
        default: state <= CORR_IDLE;
      endcase
    end
  end

endmodule
