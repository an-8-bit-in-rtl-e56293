// phase_sequencer: phase and switch controller of the computing core.
//
// MAC mode: for each input bit j = 0 (LSB) .. NBITS-1 it runs
//   RESET  (RST_TICKS)  S1 closed: integrating capacitors return to V_init
//   INTEG  (INT_TICKS)  S2 closed: word lines carry input bit j, the bit-line
//                       currents charge the integrators
//   REDIST (RED_TICKS)  S3, S4 closed: charge redistribution onto C_S
// and then CONVERT, which pulses adc_start and waits for adc_done.
// READ mode (resistance measurement): RESET, INTEG for READ_INT_TICKS (a
// single cell gives a small current, so the integration is longer), SAMPLE
// with S2, S3, S4 closed, then CONVERT.
//
// The switch states of the integration, redistribution and read-sampling
// phases follow the paper's text. The paper does not say which switch resets
// the integrating capacitor; S1, the only one left open in every phase the
// text describes, is used for it here. The tick counts are chosen so that at a
// 100 MHz phase clock an 8-bit MAC takes 54 ticks (540 ns, 1.85 M op/s, i.e.
// nine periods of the 16.7 MHz system clock) and the integration lasts 20 ns
// (MAC) or 110 ns (read), as in the paper's simulations.
//
// Interface: start is sampled in IDLE with mode; busy is high until done,
// a one-tick pulse on the tick after the conversion ends. cs_init is high
// during the first RESET of an operation and tells the neurons to set C_S to
// V_init. bit_idx is the input bit being processed.
module phase_sequencer
  import cim_pkg::*;
#(
  parameter int unsigned N_BITS    = NBITS,
  parameter int unsigned T_RST     = RST_TICKS,
  parameter int unsigned T_INT     = INT_TICKS,
  parameter int unsigned T_RED     = RED_TICKS,
  parameter int unsigned T_RD_INT  = READ_INT_TICKS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  mode_e                     mode,
  input  logic                      adc_done,
  output phase_e                    phase,
  output mode_e                     cur_mode,
  output sw_t                       sw,
  output logic [$clog2(N_BITS)-1:0] bit_idx,
  output logic                      wl_en,
  output logic                      cs_init,
  output logic                      adc_start,
  output logic                      busy,
  output logic                      done
);

  localparam int unsigned CW = 8;

  phase_e             ph_q;
  mode_e              mode_q;
  logic [CW-1:0]      cnt_q;
  logic [$clog2(N_BITS)-1:0] bit_q;
  logic               first_q;
  logic               conv_started_q;

  // Length of the current phase in ticks
  logic [CW-1:0] ph_len;
  always_comb begin
    unique case (ph_q)
      PH_RESET:  ph_len = CW'(T_RST);
      PH_INTEG:  ph_len = (mode_q == MODE_READ) ? CW'(T_RD_INT) : CW'(T_INT);
      PH_REDIST: ph_len = CW'(T_RED);
      PH_SAMPLE: ph_len = CW'(T_RED);
      default:   ph_len = CW'(1);
    endcase
  end

  wire last_tick = (cnt_q == ph_len - CW'(1));
  wire last_bit  = (bit_q == $clog2(N_BITS)'(N_BITS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q           <= PH_IDLE;
      mode_q         <= MODE_MAC;
      cnt_q          <= '0;
      bit_q          <= '0;
      first_q        <= 1'b0;
      conv_started_q <= 1'b0;
      done           <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (ph_q)
        PH_IDLE: begin
          if (start) begin
            ph_q    <= PH_RESET;
            mode_q  <= mode;
            cnt_q   <= '0;
            bit_q   <= '0;
            first_q <= 1'b1;
          end
        end
        PH_RESET, PH_INTEG, PH_REDIST, PH_SAMPLE: begin
          if (!last_tick) begin
            cnt_q <= cnt_q + CW'(1);
          end else begin
            cnt_q <= '0;
            unique case (ph_q)
              PH_RESET: ph_q <= PH_INTEG;
              PH_INTEG: ph_q <= (mode_q == MODE_READ) ? PH_SAMPLE : PH_REDIST;
              PH_REDIST: begin
                first_q <= 1'b0;
                if (last_bit) begin
                  ph_q <= PH_CONVERT;
                end else begin
                  bit_q <= bit_q + 1'b1;
                  ph_q  <= PH_RESET;
                end
              end
              default: ph_q <= PH_CONVERT;  // PH_SAMPLE
            endcase
            if (ph_q == PH_SAMPLE) first_q <= 1'b0;
            conv_started_q <= 1'b0;
          end
        end
        PH_CONVERT: begin
          conv_started_q <= 1'b1;
          if (conv_started_q && adc_done) begin
            ph_q <= PH_IDLE;
            done <= 1'b1;
          end
        end
        default: ph_q <= PH_IDLE;
      endcase
    end
  end

  always_comb begin
    sw = '0;
    unique case (ph_q)
      PH_RESET:  sw.s1 = 1'b1;
      PH_INTEG:  sw.s2 = 1'b1;
      PH_REDIST: begin sw.s3 = 1'b1; sw.s4 = 1'b1; end
      PH_SAMPLE: begin sw.s2 = 1'b1; sw.s3 = 1'b1; sw.s4 = 1'b1; end
      default:   sw = '0;
    endcase
  end

  assign phase     = ph_q;
  assign cur_mode  = mode_q;
  assign bit_idx   = bit_q;
  assign wl_en     = (ph_q == PH_INTEG);
  assign cs_init   = (ph_q == PH_RESET) && first_q;
  assign adc_start = (ph_q == PH_CONVERT) && !conv_started_q;
  assign busy      = (ph_q != PH_IDLE);

  // A conversion is requested once per operation, and switches S1 and S2
  // are never closed together (reset and integration are exclusive).
  a_sw_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(sw.s1 && sw.s2));
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    adc_start |=> !adc_start);

endmodule
