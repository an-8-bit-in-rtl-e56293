// cim_core: 8-bit resistive-memory computing core with regulated passive
// neurons and bit line weight mapping (top level).
//
// A 256 x 256 1R1T crossbar stores 32 weight columns of 8 bits; weight bit k
// of column g sits on one of the 8 bit lines of neuron g, as a binary LRS/HRS
// cell. An operation in MAC mode takes 256 8-bit inputs and returns 32 ADC
// codes proportional to sum_i X_i W_(i,g): the inputs are applied bit-serially
// (LSB first), each bit line's current is integrated on its own capacitor,
// the binary-weighted capacitors and the ADC's sampling capacitor add the
// partial products up by charge redistribution, and the ADC converts the
// result. In READ mode the core measures the LRS value of one cell per neuron
// (word line read_row, integrator read_integ), which feeds the mapping.
//
// Bit line weight mapping: blwm_mapper chooses, for the weight column of
// neuron map_group, which bit line holds which weight bit and which cells
// stay in LRS. When it finishes, this module writes the chosen permutation
// into the bit-line multiplexer (N_BITS ticks) and programs the cell states
// row by row (N_ROWS ticks), then pulses map_done. Host writes to the mux
// and the array are ignored during that apply pass.
//
// Analog parts (array, neurons, ADCs) are behavioural models; the
// sequencing, input driver, multiplexer, mapping engine and the apply logic
// are synthesizable. The bit-line regulator is not modelled as a circuit:
// the models assume its effect, a constant read voltage.
//
// Timing at the defaults (100 MHz phase clock): MAC 54 ticks from start to
// the done pulse, read 21 ticks; see phase_sequencer.
module cim_core
  import cim_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned N_BITS = NBITS,
  localparam int unsigned NG    = N_COLS / N_BITS,
  localparam int unsigned IW    = GW + $clog2(N_ROWS),
  localparam int unsigned BW    = $clog2(N_BITS),
  localparam int unsigned RWI   = $clog2(N_ROWS),
  localparam int unsigned GWI   = $clog2(NG),
  localparam int unsigned WW    = N_BITS + GFRAC,
  localparam int unsigned SWR   = WW + 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // inputs
  input  logic                             x_load,
  input  logic [N_ROWS-1:0][N_BITS-1:0]    x_in,
  // operation control
  input  logic                             start,
  input  mode_e                            mode,
  input  logic [RWI-1:0]                   read_row,
  input  logic [BW-1:0]                    read_integ,
  input  logic [ACC_W-1:0]                 adc_fs,
  output logic                             busy,
  output logic                             done,
  output logic [NG-1:0][ADC_BITS-1:0]      y_code,
  output logic [NG-1:0][ACC_W-1:0]         vout_drop,
  output sw_t                              sw,
  output phase_e                           phase,
  // array programming (host)
  input  logic                             form_all_lrs,
  input  logic                             prog_we,
  input  logic [RWI-1:0]                   prog_row,
  input  logic [GWI-1:0]                   prog_group,
  input  logic [N_BITS-1:0]                prog_lrs,
  // device-variation load of the array model
  input  logic                             var_we,
  input  logic [RWI-1:0]                   var_row,
  input  logic [$clog2(N_COLS)-1:0]        var_col,
  input  logic [GW-1:0]                    var_g,
  // multiplexer configuration (host)
  input  logic                             cfg_we,
  input  logic [GWI-1:0]                   cfg_group,
  input  logic [BW-1:0]                    cfg_integ,
  input  logic [BW-1:0]                    cfg_bl,
  output logic                             perm_ok,
  output logic [NG-1:0][N_BITS-1:0][BW-1:0] mux_sel,
  // bit line weight mapping
  input  logic                             map_r_we,
  input  logic [RWI-1:0]                   map_r_row,
  input  logic [BW-1:0]                    map_r_col,
  input  logic [GW-1:0]                    map_r_val,
  input  logic                             map_w_we,
  input  logic [RWI-1:0]                   map_w_row,
  input  logic [WW-1:0]                    map_w_val,
  input  logic                             map_start,
  input  logic                             map_remap,
  input  logic [GWI-1:0]                   map_group,
  output logic                             map_busy,
  output logic                             map_done,
  input  logic [RWI-1:0]                   map_res_row,
  output logic signed [SWR-1:0]            map_res
);

  // ---------------------------------------------------------------- control
  mode_e              cur_mode;
  logic [BW-1:0]      bit_idx;
  logic               wl_en, cs_init, adc_start;
  logic [NG-1:0]      adc_done;

  phase_sequencer #(.N_BITS(N_BITS)) u_seq (
    .clk, .rst_n, .start, .mode,
    .adc_done (adc_done[0]),   // all ADCs convert in lock step
    .phase, .cur_mode, .sw, .bit_idx, .wl_en, .cs_init, .adc_start,
    .busy, .done
  );

  logic [N_ROWS-1:0] wl;

  wl_driver #(.N_ROWS(N_ROWS), .N_BITS(N_BITS)) u_wl (
    .clk, .rst_n, .load(x_load), .x_in, .mode(cur_mode), .read_row,
    .bit_idx, .wl_en, .wl
  );

  // ---------------------------------------------------- mapping and apply
  typedef enum logic [1:0] {A_IDLE, A_MUX, A_ROWS} apply_e;

  apply_e                       ap_q;
  logic [RWI-1:0]               ap_row_q;
  logic [BW-1:0]                ap_k_q;
  logic [GWI-1:0]               ap_grp_q;
  logic                         mp_busy, mp_done;
  logic [N_BITS-1:0][BW-1:0]    mp_perm;
  logic [N_ROWS-1:0][N_BITS-1:0] mp_q;

  blwm_mapper #(.N_ROWS(N_ROWS), .N_BITS(N_BITS)) u_map (
    .clk, .rst_n,
    .r_we(map_r_we), .r_row(map_r_row), .r_col(map_r_col), .r_val(map_r_val),
    .w_we(map_w_we), .w_row(map_w_row), .w_val(map_w_val),
    .start(map_start), .remap_en(map_remap),
    .busy(mp_busy), .done(mp_done),
    .perm(mp_perm), .q_bits(mp_q),
    .res_row(map_res_row), .res_rd(map_res)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap_q     <= A_IDLE;
      ap_row_q <= '0;
      ap_k_q   <= '0;
      ap_grp_q <= '0;
      map_done <= 1'b0;
    end else begin
      map_done <= 1'b0;
      unique case (ap_q)
        A_IDLE: begin
          if (map_start && !mp_busy) ap_grp_q <= map_group;
          if (mp_done) begin
            ap_q   <= A_MUX;
            ap_k_q <= '0;
          end
        end
        A_MUX: begin
          ap_k_q <= ap_k_q + 1'b1;
          if (ap_k_q == BW'(N_BITS - 1)) begin
            ap_q     <= A_ROWS;
            ap_row_q <= '0;
          end
        end
        A_ROWS: begin
          ap_row_q <= ap_row_q + 1'b1;
          if (ap_row_q == RWI'(N_ROWS - 1)) begin
            ap_q     <= A_IDLE;
            map_done <= 1'b1;
          end
        end
        default: ap_q <= A_IDLE;
      endcase
    end
  end

  assign map_busy = mp_busy || (ap_q != A_IDLE);

  // Physical bit line perm[i] of the group holds weight bit i
  logic [N_BITS-1:0] ap_lrs;
  always_comb begin
    ap_lrs = '0;
    for (int i = 0; i < N_BITS; i++) ap_lrs[mp_perm[i]] = mp_q[ap_row_q][i];
  end

  wire applying_mux  = (ap_q == A_MUX);
  wire applying_rows = (ap_q == A_ROWS);

  // ------------------------------------------------------------- datapath
  logic [N_COLS-1:0][IW-1:0]          bl_i;
  logic [NG-1:0][N_BITS-1:0][IW-1:0]  int_i;

  rram_array #(.N_ROWS(N_ROWS), .N_COLS(N_COLS), .N_BITS(N_BITS)) u_array (
    .clk, .rst_n,
    .form_all_lrs (form_all_lrs && !applying_rows),
    .prog_we      (applying_rows || prog_we),
    .prog_row     (applying_rows ? ap_row_q : prog_row),
    .prog_group   (applying_rows ? ap_grp_q : prog_group),
    .prog_lrs     (applying_rows ? ap_lrs   : prog_lrs),
    .var_we, .var_row, .var_col, .var_g,
    .wl, .bl_i
  );

  bl_mux #(.N_COLS(N_COLS), .N_BITS(N_BITS), .IW(IW)) u_mux (
    .clk, .rst_n,
    .cfg_we    (applying_mux || cfg_we),
    .cfg_group (applying_mux ? ap_grp_q : cfg_group),
    .cfg_integ (applying_mux ? ap_k_q : cfg_integ),
    .cfg_bl    (applying_mux ? mp_perm[ap_k_q] : cfg_bl),
    .bl_i, .int_i, .sel(mux_sel), .perm_ok
  );

  for (genvar g = 0; g < NG; g++) begin : g_neuron
    passive_neuron #(.N_BITS(N_BITS), .IW(IW)) u_neuron (
      .clk, .rst_n, .phase, .mode(cur_mode), .cs_init, .read_integ,
      .int_i(int_i[g]), .vc_drop(), .vout_drop(vout_drop[g])
    );

    adc u_adc (
      .clk, .rst_n, .start(adc_start), .vin(vout_drop[g]), .fs(adc_fs),
      .code(y_code[g]), .done(adc_done[g])
    );
  end

  a_no_map_during_op: assert property (@(posedge clk) disable iff (!rst_n)
                                       applying_rows |-> !busy);

endmodule
