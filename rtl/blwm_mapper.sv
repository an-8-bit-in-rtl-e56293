// blwm_mapper: pseudo-binary quantization and greedy bit line weight mapping
// of one weight column onto one neuron's N_BITS bit lines.
//
// Inputs: the weights w_j of N_ROWS rows (unsigned, GFRAC fractional bits, in
// units of the weight LSB) and the measured normalised LRS value r_(j,c) of
// every cell (row j, bit line c of the group; GFRAC fractional bits, mean
// 1.0). A cell in LRS adds r * 2^i to the stored weight when its bit line is
// used for bit i ("pseudo-binary" code); an HRS cell adds 0.
//
// Quantization of one cell, MSB first, with the remaining weight w_res:
//   q = !( (r*2^i - w_res > 0.5) | (r <= 0.5) | (r*2^i > 2*w_res) )
// and w_res -= q * r * 2^i. (The paper prints the importance as 2^(i-1) with
// bits counted from 1; its worked example, w = 13.4 on cells 1.05, 1.1,
// 1.125, 0.93, fixes it as 2^i with bits counted from 0.)
// Greedy mapping: for bit i = N_BITS-1 down to 0, every bit line not yet used
// is tried; the loss of a candidate is max_j|w_res,j| * sum_j w_res,j^2 over
// the residuals it would leave, and the candidate with the smallest loss
// (lowest index on a tie) becomes bit i. With remap_en low, bit i simply
// uses bit line i (resistance-based quantization with normal mapping).
// The paper writes the max without an absolute value; a signed max would
// reward negative residuals, so the magnitude is used here.
//
// Timing: one row per tick. start (in idle) begins; an initial pass of N_ROWS
// ticks copies the weights, then for each bit every candidate takes N_ROWS + 1
// ticks and the commit pass another N_ROWS. For N_BITS = 8 the done pulse
// comes 45 * N_ROWS + 37 ticks after the start tick with remapping and
// 9 * N_ROWS + 1 without (11,557 ticks, 116 us at 100 MHz, for 256 rows). done pulses for one tick at the end; perm[i] (bit
// line chosen for bit i), q_bits[j][i] (state of bit i of row j, 1 = LRS)
// and the residuals (res_rd for row res_row) then stay valid.
// The paper presents this as an algorithm and does not say where it runs;
// putting it next to the array as a sequential engine is this design's
// choice, as are the storage, load ports and fixed-point widths.
module blwm_mapper
  import cim_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_BITS = NBITS,
  parameter int unsigned RW     = GW,
  parameter int unsigned FRAC   = GFRAC,
  localparam int unsigned WW    = N_BITS + FRAC,     // weight width
  localparam int unsigned SW    = WW + 4,            // signed residual width
  localparam int unsigned BW    = $clog2(N_BITS),
  localparam int unsigned RWI   = $clog2(N_ROWS)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // loading of measured cell values and weights
  input  logic                           r_we,
  input  logic [RWI-1:0]                 r_row,
  input  logic [BW-1:0]                  r_col,
  input  logic [RW-1:0]                  r_val,
  input  logic                           w_we,
  input  logic [RWI-1:0]                 w_row,
  input  logic [WW-1:0]                  w_val,
  // control
  input  logic                           start,
  input  logic                           remap_en,
  output logic                           busy,
  output logic                           done,
  // results
  output logic [N_BITS-1:0][BW-1:0]      perm,
  output logic [N_ROWS-1:0][N_BITS-1:0]  q_bits,
  input  logic [RWI-1:0]                 res_row,
  output logic signed [SW-1:0]           res_rd
);

  typedef enum logic [2:0] {M_IDLE, M_INIT, M_EVAL, M_PICK, M_COMMIT} mstate_e;

  logic [N_ROWS-1:0][N_BITS-1:0][RW-1:0] r_mem;
  logic [N_ROWS-1:0][WW-1:0]             w_mem;
  logic signed [N_ROWS-1:0][SW-1:0]      res_mem;
  logic [N_ROWS-1:0][N_BITS-1:0]         q_mem;

  mstate_e            st_q;
  logic [RWI-1:0]     row_q;
  logic [BW-1:0]      bit_q;       // weight bit being placed
  logic [BW-1:0]      cand_q;      // bit line under evaluation
  logic [N_BITS-1:0]  avail_q;     // bit lines still free
  logic [SW-1:0]      maxabs_q;
  logic [2*SW+RWI-1:0] sumsq_q;
  logic [3*SW+RWI-1:0] best_q;
  logic               best_vld_q;
  logic               remap_q;
  logic [BW-1:0]      best_c_q;
  logic [N_BITS-1:0][BW-1:0] perm_q;

  // One-cell pseudo-binary quantization
  logic [BW-1:0]          col_sel;
  logic signed [SW-1:0]   rm, res_cur, res_new, res_abs;
  logic                   q_cell;
  localparam logic signed [SW-1:0] HALF = SW'(1 << (FRAC - 1));

  assign col_sel = (st_q == M_COMMIT) ? best_c_q : cand_q;

  always_comb begin
    res_cur = res_mem[row_q];
    rm      = SW'({1'b0, r_mem[row_q][col_sel]}) <<< bit_q;
    q_cell  = !(((rm - res_cur) > HALF) ||
                (SW'({1'b0, r_mem[row_q][col_sel]}) <= HALF) ||
                (rm > (res_cur <<< 1)));
    res_new = q_cell ? (res_cur - rm) : res_cur;
    res_abs = (res_new < 0) ? -res_new : res_new;
  end

  wire last_row = (row_q == RWI'(N_ROWS - 1));

  // Next free candidate at or above a given index
  function automatic logic [BW:0] next_free(input logic [N_BITS-1:0] av, input int from);
    next_free = {1'b1, BW'(0)};   // none
    for (int c = N_BITS - 1; c >= 0; c--)
      if (c >= from && av[c]) next_free = {1'b0, BW'(c)};
  endfunction

  logic [BW:0] nf_after, nf_commit;
  assign nf_after  = next_free(avail_q, int'(cand_q) + 1);
  assign nf_commit = next_free(avail_q & ~(N_BITS'(1) << best_c_q), 0);

  logic signed [2*SW-1:0] res_sq;
  assign res_sq = res_new * res_new;

  logic [3*SW+RWI-1:0] loss;
  assign loss = (3*SW+RWI)'(maxabs_q) * (3*SW+RWI)'(sumsq_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= M_IDLE;
      row_q      <= '0;
      bit_q      <= '0;
      cand_q     <= '0;
      avail_q    <= '0;
      maxabs_q   <= '0;
      sumsq_q    <= '0;
      best_q     <= '0;
      best_vld_q <= 1'b0;
      remap_q    <= 1'b0;
      best_c_q   <= '0;
      done       <= 1'b0;
      res_mem    <= '0;
      q_mem      <= '0;
      for (int i = 0; i < N_BITS; i++) perm_q[i] <= BW'(i);
    end else begin
      done <= 1'b0;
      unique case (st_q)
        M_IDLE: if (start) begin
          st_q    <= M_INIT;
          remap_q <= remap_en;
          row_q <= '0;
        end
        M_INIT: begin
          res_mem[row_q] <= SW'({1'b0, w_mem[row_q]});
          q_mem[row_q]   <= '0;
          row_q          <= row_q + 1'b1;
          if (last_row) begin
            bit_q      <= BW'(N_BITS - 1);
            avail_q    <= '1;
            row_q      <= '0;
            best_vld_q <= 1'b0;
            maxabs_q   <= '0;
            sumsq_q    <= '0;
            if (remap_q) begin
              cand_q <= '0;
              st_q   <= M_EVAL;
            end else begin
              best_c_q <= BW'(N_BITS - 1);
              st_q     <= M_COMMIT;
            end
          end
        end
        M_EVAL: begin
          if (res_abs > maxabs_q) maxabs_q <= res_abs;
          sumsq_q <= sumsq_q + (2*SW+RWI)'(unsigned'(res_sq));
          row_q   <= row_q + 1'b1;
          if (last_row) st_q <= M_PICK;
        end
        M_PICK: begin
          // maxabs_q and sumsq_q now hold the full candidate totals
          if (!best_vld_q || loss < best_q) begin
            best_q     <= loss;
            best_c_q   <= cand_q;
            best_vld_q <= 1'b1;
          end
          maxabs_q <= '0;
          sumsq_q  <= '0;
          row_q    <= '0;
          if (!nf_after[BW]) begin
            cand_q <= nf_after[BW-1:0];
            st_q   <= M_EVAL;
          end else begin
            st_q <= M_COMMIT;
          end
        end
        M_COMMIT: begin
          res_mem[row_q]        <= res_new;
          q_mem[row_q][bit_q]   <= q_cell;
          row_q                 <= row_q + 1'b1;
          if (last_row) begin
            perm_q[bit_q]     <= best_c_q;
            avail_q[best_c_q] <= 1'b0;
            row_q             <= '0;
            best_vld_q        <= 1'b0;
            if (bit_q == '0) begin
              st_q <= M_IDLE;
              done <= 1'b1;
            end else begin
              bit_q <= bit_q - 1'b1;
              if (remap_q) begin
                cand_q <= nf_commit[BW-1:0];
                st_q   <= M_EVAL;
              end else begin
                best_c_q <= bit_q - 1'b1;
              end
            end
          end
        end
        default: st_q <= M_IDLE;
      endcase
    end
  end

  // Load ports (host writes while idle)
  always_ff @(posedge clk) begin
    if (r_we) r_mem[r_row][r_col] <= r_val;
    if (w_we) w_mem[w_row]        <= w_val;
  end

  assign busy   = (st_q != M_IDLE);
  assign perm   = perm_q;
  assign q_bits = q_mem;
  assign res_rd = res_mem[res_row];

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         busy |-> !(r_we || w_we));

endmodule
