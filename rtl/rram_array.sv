// rram_array: behavioural model of the 1R1T RRAM crossbar (not synthesizable
// silicon: the real part is an analog resistive array).
//
// Each cell stores one weight bit as a binary resistance state: LRS (bit 1)
// or HRS (bit 0). An LRS cell on an active word line adds its normalised
// conductance g (unsigned, GFRAC fractional bits, nominal 1.0 = 1<<GFRAC) to
// its bit line's current; HRS cells add nothing, since the paper ignores
// their spread. With the bit-line regulator holding the 1R1T drain voltage
// constant, the bit-line current is the plain sum of the conductances, which
// is what bl_i returns (in units of the nominal LRS cell current / 2^GFRAC).
//
// g models the cell-to-cell spread of the LRS resistance; it is loaded per
// cell through var_* (a modelling port with no silicon counterpart) and
// defaults to the nominal value. The state of a cell is written per row and
// per group of N_BITS bit lines through prog_* (the set/reset programming the
// paper describes at the level "RRAMs with value 0 are set to HRS"), or set
// to LRS everywhere with form_all_lrs, the first step of resistance
// measurement and mapping. Programming takes effect at the next clock edge;
// bl_i is combinational in wl.
module rram_array
  import cim_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned N_BITS = NBITS,
  parameter int unsigned IW     = GW + $clog2(N_ROWS)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // programming of resistance states
  input  logic                                form_all_lrs,
  input  logic                                prog_we,
  input  logic [$clog2(N_ROWS)-1:0]           prog_row,
  input  logic [$clog2(N_COLS/N_BITS)-1:0]    prog_group,
  input  logic [N_BITS-1:0]                   prog_lrs,
  // device-variation load (model only)
  input  logic                                var_we,
  input  logic [$clog2(N_ROWS)-1:0]           var_row,
  input  logic [$clog2(N_COLS)-1:0]           var_col,
  input  logic [GW-1:0]                       var_g,
  // read path
  input  logic [N_ROWS-1:0]                   wl,
  output logic [N_COLS-1:0][IW-1:0]           bl_i
);

  logic [N_ROWS-1:0][N_COLS-1:0]          lrs_q;
  logic [N_ROWS-1:0][N_COLS-1:0][GW-1:0]  g_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lrs_q <= '0;
    end else if (form_all_lrs) begin
      for (int r = 0; r < N_ROWS; r++) lrs_q[r] <= '1;
    end else if (prog_we) begin
      for (int b = 0; b < N_BITS; b++)
        lrs_q[prog_row][int'(prog_group) * N_BITS + b] <= prog_lrs[b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_ROWS; r++)
        for (int c = 0; c < N_COLS; c++)
          g_q[r][c] <= GW'(1 << GFRAC);
    end else if (var_we) begin
      g_q[var_row][var_col] <= var_g;
    end
  end

  always_comb begin
    for (int c = 0; c < N_COLS; c++) begin
      bl_i[c] = '0;
      for (int r = 0; r < N_ROWS; r++)
        if (wl[r] && lrs_q[r][c]) bl_i[c] = bl_i[c] + IW'(g_q[r][c]);
    end
  end

endmodule
