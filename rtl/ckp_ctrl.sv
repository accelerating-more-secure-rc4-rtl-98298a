// ckp_ctrl: counter and comparators that sequence the composite
// KSA-PKRS-PRGA (CKP) coprocessor and the S-box copies of design D7.
//
// After a key request (start) the controller runs
//   INIT       1 clock   identity S-box, i_{n-1} = 255, j_{n-1} = 0
//   KSA        KSA_CLKS  double steps with key bytes (128 clocks = 256 swaps)
//   PKRS_INIT  1 clock   i_{n-1} = 0, j_{n-1} = 0, PKRS_EN set
//   PKRS       PKRS_CLKS double steps without key (512 clocks = 1024 swaps)
//   PRGA       double steps with the Z circuits enabled (PRGA_EN), one per
//              clock while `adv` is high, until the next key request
// so the first PRGA step happens in clock 1+128+1+512 = 642 after start,
// the count of the paper's cost table. At the last PKRS clock i and j are
// reloaded with 0 for the PRGA (prga_start).
//
// During PKRS a comparator per stand-alone coprocessor raises copy_en[k]
// (the paper's S(k+1)_EN) for one clock when PKRS_CLKS*(NCOP-k)/NCOP
// double steps have been done: with the defaults S4 is copied from S1 after
// 128, S3 after 256 and S2 after 384 PKRS clocks, and S1 itself goes on to
// 512. The sequence and the copy points are the paper's (its figure prints
// 364 for S2 where the text says 384; the text is followed); the extra
// clocks and the restart on a new request are this design's choices.
// copy_en[0] is never set (S1 is not copied).
module ckp_ctrl
  import rc4_pkg::*;
#(
  parameter int unsigned NCOP      = 4,
  parameter int unsigned KSA_CLKS  = 128,
  parameter int unsigned PKRS_CLKS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            adv,
  output phase_t          phase,
  output logic            step,        // perform a double step this clock
  output logic            pkrs_en,     // key bytes replaced by 0
  output logic            prga_en,     // Z circuits enabled
  output logic            init,        // identity fill of S1
  output logic            ksa_ij,      // load i = 255, j = 0
  output logic            reset_ij,    // load i = 0,   j = 0
  output logic            prga_start,  // last PKRS clock: stand-alone j = 0
  output logic [NCOP-1:0] copy_en
);

  localparam int unsigned CW = $clog2(KSA_CLKS > PKRS_CLKS ? KSA_CLKS : PKRS_CLKS) + 1;

  phase_t        phase_q;
  logic [CW-1:0] cnt_q;
  logic          last_ksa, last_pkrs;

  assign last_ksa  = (phase_q == PH_KSA)  && (cnt_q == CW'(KSA_CLKS - 1));
  assign last_pkrs = (phase_q == PH_PKRS) && (cnt_q == CW'(PKRS_CLKS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q <= PH_IDLE;
      cnt_q   <= '0;
    end else begin
      unique case (phase_q)
        PH_IDLE:      if (start) phase_q <= PH_INIT;
        PH_INIT:      begin phase_q <= PH_KSA; cnt_q <= '0; end
        PH_KSA:       if (last_ksa) phase_q <= PH_PKRS_INIT;
                      else cnt_q <= cnt_q + 1'b1;
        PH_PKRS_INIT: begin phase_q <= PH_PKRS; cnt_q <= '0; end
        PH_PKRS:      if (last_pkrs) phase_q <= PH_PRGA;
                      else cnt_q <= cnt_q + 1'b1;
        PH_PRGA:      if (start) phase_q <= PH_INIT;
        default:      phase_q <= PH_IDLE;
      endcase
    end
  end

  always_comb begin
    phase      = phase_q;
    init       = (phase_q == PH_INIT);
    ksa_ij     = (phase_q == PH_INIT);
    prga_start = last_pkrs;
    reset_ij   = (phase_q == PH_PKRS_INIT) || last_pkrs;
    pkrs_en    = (phase_q == PH_PKRS_INIT) || (phase_q == PH_PKRS) || (phase_q == PH_PRGA);
    prga_en    = (phase_q == PH_PRGA) && !start;
    unique case (phase_q)
      PH_KSA, PH_PKRS: step = 1'b1;
      PH_PRGA:         step = adv && !start;
      default:         step = 1'b0;
    endcase
    copy_en = '0;
    for (int unsigned k = 1; k < NCOP; k++)
      copy_en[k] = (phase_q == PH_PKRS) &&
                   (cnt_q == CW'(PKRS_CLKS * (NCOP - k) / NCOP));
  end

endmodule
