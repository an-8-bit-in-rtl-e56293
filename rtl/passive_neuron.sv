// passive_neuron: behavioural charge-domain model of one regulated passive
// neuron (N_BITS integrating capacitors plus the ADC sampling capacitor C_S).
// The real part is analog; this model tracks voltages as exact integers.
//
// Units: a charge q on an integrator is the sum, over the ticks of the
// integration phase, of the bit-line current word (normalised cell
// conductances, GFRAC fractional bits). A voltage drop of q/C_f is one unit.
// vout_drop holds V_init - V_out scaled by 2^(2*N_BITS), so every value that
// the halving steps below produce stays an integer.
//
// MAC mode, per input bit j (phases from phase_sequencer):
//   RESET   integrator charges q_k cleared (V_C back to V_init); on the
//           first bit also C_S back to V_init (cs_init).
//   INTEG   q_k += int_i[k] each tick (ideal regulator: current independent
//           of the integrating voltage).
//   REDIST  binary-weighted capacitors C_k = C_f / 2^(N_BITS-k) share their
//           charge, V_S drops by 2^-N_BITS * sum_k 2^k q_k, and C_S = C_f
//           averages with them: V_out = (V_S + V_out^-)/2.
// After N_BITS bits, vout_drop = sum_j 2^j sum_k 2^k q_(j,k), i.e. the
// dot product sum_i X_i W_i times the integration time and the nominal
// conductance. This is the paper's charge-redistribution arithmetic; the
// integer scaling is this model's.
// READ mode (resistance measurement): INTEG charges integrator read_integ
// only; SAMPLE gives V_out = (V_init + V_S)/2, so vout_drop = q << (2n-1).
//
// Every update happens on the first tick of its phase except INTEG, which
// accumulates every tick; results are visible the tick after.
module passive_neuron
  import cim_pkg::*;
#(
  parameter int unsigned N_BITS = NBITS,
  parameter int unsigned IW     = GW + $clog2(ROWS),
  parameter int unsigned AW     = ACC_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  phase_e                          phase,
  input  mode_e                           mode,
  input  logic                            cs_init,
  input  logic [$clog2(N_BITS)-1:0]       read_integ,
  input  logic [N_BITS-1:0][IW-1:0]       int_i,
  output logic [N_BITS-1:0][AW-1:0]       vc_drop,
  output logic [AW-1:0]                   vout_drop
);

  logic [N_BITS-1:0][AW-1:0] q_q;
  logic [AW-1:0]             acc_q;
  logic                      shared_q;   // this phase's redistribution done
  logic [AW-1:0]             s_sum;

  // Binary-weighted sum of the integrator charges (charge sharing of C_k)
  always_comb begin
    s_sum = '0;
    for (int k = 0; k < N_BITS; k++) s_sum = s_sum + (q_q[k] << k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q      <= '0;
      acc_q    <= '0;
      shared_q <= 1'b0;
    end else begin
      unique case (phase)
        PH_RESET: begin
          q_q      <= '0;
          shared_q <= 1'b0;
          if (cs_init) acc_q <= '0;
        end
        PH_INTEG: begin
          for (int k = 0; k < N_BITS; k++)
            if (mode == MODE_MAC || k == int'(read_integ))
              q_q[k] <= q_q[k] + AW'(int_i[k]);
        end
        PH_REDIST: begin
          if (!shared_q) begin
            acc_q    <= (acc_q + (s_sum << N_BITS)) >> 1;
            shared_q <= 1'b1;
          end
        end
        PH_SAMPLE: begin
          if (!shared_q) begin
            acc_q    <= q_q[read_integ] << (2 * N_BITS - 1);
            shared_q <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  assign vc_drop   = q_q;
  assign vout_drop = acc_q;

endmodule
