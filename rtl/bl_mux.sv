// bl_mux: the n x MUXn between the bit lines and the integrators.
//
// Each neuron owns N_BITS adjacent bit lines and N_BITS integrators, and
// integrator k carries weight 2^k in the charge redistribution. Bit line
// weight mapping decides which physical bit line holds which weight bit, so
// each integrator k of neuron g has a multiplexer that picks one of the
// neuron's bit lines: int_i[g][k] = bl_i[g*N_BITS + sel[g][k]]. The
// selections are held in a configuration register written one entry per
// tick through cfg_*; reset gives the identity (integrator k <- bit line k),
// which is plain binary mapping.
//
// In silicon the multiplexer switches analog bit-line currents; here it
// routes the models' current words, and the selection logic and register are
// ordinary synchronous logic. perm_ok reports whether every neuron's
// selection is a permutation (each bit line used exactly once); the register
// layout, write port and that check are this implementation's choices.
module bl_mux
  import cim_pkg::*;
#(
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned N_BITS = NBITS,
  parameter int unsigned IW     = GW + $clog2(ROWS),
  localparam int unsigned NG    = N_COLS / N_BITS,
  localparam int unsigned SW    = $clog2(N_BITS)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               cfg_we,
  input  logic [$clog2(NG)-1:0]              cfg_group,
  input  logic [SW-1:0]                      cfg_integ,
  input  logic [SW-1:0]                      cfg_bl,
  input  logic [N_COLS-1:0][IW-1:0]          bl_i,
  output logic [NG-1:0][N_BITS-1:0][IW-1:0]  int_i,
  output logic [NG-1:0][N_BITS-1:0][SW-1:0]  sel,
  output logic                               perm_ok
);

  logic [NG-1:0][N_BITS-1:0][SW-1:0] sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NG; g++)
        for (int k = 0; k < N_BITS; k++)
          sel_q[g][k] <= SW'(k);
    end else if (cfg_we) begin
      sel_q[cfg_group][cfg_integ] <= cfg_bl;
    end
  end

  always_comb begin
    for (int g = 0; g < NG; g++)
      for (int k = 0; k < N_BITS; k++)
        int_i[g][k] = bl_i[g * N_BITS + int'(sel_q[g][k])];
  end

  always_comb begin
    logic [N_BITS-1:0] used;
    perm_ok = 1'b1;
    for (int g = 0; g < NG; g++) begin
      used = '0;
      for (int k = 0; k < N_BITS; k++) used[sel_q[g][k]] = 1'b1;
      if (used != '1) perm_ok = 1'b0;
    end
  end

  assign sel = sel_q;

endmodule
