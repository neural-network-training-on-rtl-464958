// vref_select: chooses the ADC reference VRef,p for one IMC operation from
// the number of active rows, and the matching near-memory gain.
//
//   VREF_FIXED     VRef,p = r_fixed, whatever the sparsity;
//   VREF_VARIABLE  VRef,p = n_active clamped to [V_prec, VRef,pmax]
//                  = [255, 2304] row units, the smallest range that cannot
//                  clip, never below the level that is already lossless;
//   VREF_DUAL      VRef,p = V_prec (255) when n_active <= 255, else the
//                  high-range value r_high (2304 = 0.8 V by default, the
//                  paper's chosen pair is 0.8 V / 0.089 V).
// VRef,n is 0 in every mode. `hi` flags a dual-mode step that used the
// high reference. `gain` = round(VRef,p * 2^FRAC_BITS / 255) converts an
// ADC code back to row units with FRAC_BITS fraction bits; it equals
// VRef,p + round(VRef,p / 255). Purely combinational.
//
// The three modes and their levels follow the paper. Clamping r_fixed and
// the gain format are this design's choices.
module vref_select
  import imc_pkg::*;
(
  input  vref_mode_e      mode,
  input  logic [RW-1:0]   n_active,
  input  logic [RW-1:0]   r_fixed,
  input  logic [RW-1:0]   r_high,
  output logic [RW-1:0]   vrefp,
  output logic [RW-1:0]   vrefn,
  output logic [RW:0]     gain,
  output logic            hi
);

  localparam logic [RW-1:0] RP = RW'(R_PREC);
  localparam logic [RW-1:0] RM = RW'(R_MAX);

  always_comb begin
    hi = 1'b0;
    unique case (mode)
      VREF_VARIABLE: vrefp = (n_active < RP) ? RP : (n_active > RM) ? RM : n_active;
      VREF_DUAL: begin
        hi    = (n_active > RP);
        vrefp = hi ? r_high : RP;
      end
      default:       vrefp = (r_fixed == '0) ? RW'(1) : r_fixed;
    endcase
    vrefn = '0;
    gain  = {1'b0, vrefp} + (RW+1)'((32'(vrefp) + 32'(ADC_FS / 2)) / 32'(ADC_FS));
  end

endmodule
