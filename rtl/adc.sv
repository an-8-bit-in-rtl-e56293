// adc: behavioural model of the neuron's output ADC (the real part is an
// analog converter whose architecture is not specified; this model only
// reproduces its transfer function and its conversion time).
//
// The ADC converts the drop of the output voltage, V_init - V_out, given in
// the neuron model's units (vin), into an ADC_BITS code
//   code = min(2^B - 1, floor(vin * 2^B / fs)),
// where fs is the drop that corresponds to the full input range. fs is a run
// time input because the range needed depends on the mode (MAC or resistance
// read), the integration time and the number of active input lines; the
// paper does not give the ADC's range, so this is the model's choice.
//
// Timing: vin is sampled on the tick where start is high; done is a one-tick
// pulse in the LAT-th tick counted from the start tick (LAT >= 2), with code
// valid from then until the next conversion ends.
module adc
  import cim_pkg::*;
#(
  parameter int unsigned AW   = ACC_W,
  parameter int unsigned B    = ADC_BITS,
  parameter int unsigned LAT  = ADC_LAT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] vin,
  input  logic [AW-1:0] fs,
  output logic [B-1:0]  code,
  output logic          done
);

  localparam int unsigned CW = $clog2(LAT + 1);

  logic [AW-1:0]   sample_q;
  logic [CW-1:0]   cnt_q;
  logic [AW+B-1:0] quot;

  always_comb begin
    if (fs == '0) quot = '1;
    else          quot = {sample_q, B'(0)} / {B'(0), fs};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample_q <= '0;
      cnt_q    <= '0;
      code     <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        sample_q <= vin;
        cnt_q    <= CW'(LAT - 1);
      end else if (cnt_q != '0) begin
        cnt_q <= cnt_q - CW'(1);
        if (cnt_q == CW'(2)) begin
          done <= 1'b1;
          code <= (quot > (AW+B)'((1 << B) - 1)) ? B'((1 << B) - 1) : quot[B-1:0];
        end
      end
    end
  end

endmodule
