// wl_driver: word-line input driver of the computing core.
//
// The inputs are applied bit-serially, one bit plane per integration phase,
// from the least to the most significant bit, so every word line only ever
// carries the same read voltage or nothing (this is what keeps the
// multiplication linear). In MAC mode word line i carries bit bit_idx of
// input X_i while wl_en is high. In resistance-reading mode only the word
// line read_row is driven, the others stay at 0, as the paper describes for
// measuring one 1R1T cell.
//
// The inputs are captured into a register on load (one tick) so the host may
// change x_in while an operation runs; the register and the load strobe are
// this implementation's choice. wl is combinational from the register,
// bit_idx, mode and wl_en.
module wl_driver
  import cim_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_BITS = NBITS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            load,
  input  logic [N_ROWS-1:0][N_BITS-1:0]   x_in,
  input  mode_e                           mode,
  input  logic [$clog2(N_ROWS)-1:0]       read_row,
  input  logic [$clog2(N_BITS)-1:0]       bit_idx,
  input  logic                            wl_en,
  output logic [N_ROWS-1:0]               wl
);

  logic [N_ROWS-1:0][N_BITS-1:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    x_q <= '0;
    else if (load) x_q <= x_in;
  end

  always_comb begin
    for (int i = 0; i < N_ROWS; i++) begin
      if (!wl_en)                 wl[i] = 1'b0;
      else if (mode == MODE_READ) wl[i] = (i == int'(read_row));
      else                        wl[i] = x_q[i][bit_idx];
    end
  end

endmodule
