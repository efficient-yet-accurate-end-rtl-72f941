// appr_bsn: two-stage approximate (spatial) bitonic sorting network.
//
// Instead of sorting all IN_W bits in one large BSN, the input is split into
// M1 groups of L1 bits. Each group is sorted by its own sub-BSN and reduced by
// a fixed sub-sampling block (clip C1, stride S1) to O1 = (L1-2*C1)/S1 bits.
// The M1*O1 surviving bits are sorted by a second sub-BSN whose sub-sampling
// block is set at run time by cfg, so the same hardware can emit a short
// partial sum (e.g. 72 bits: clip 72, stride 2) or a long final sum (e.g. 256
// bits: clip 16, stride 1). The result is top-aligned in dout; bits below the
// (IN-2*clip)/stride valid samples are 0.
//
// Progressive sorting with sub-sampling per sub-BSN follows the source paper's
// parameterised approximate BSN. The paper gives no stage sizes; the default
// split (2 stages, 9 sub-BSNs of 64 bits, stride 2 in stage 1) is this
// design's choice, fitted to the 576-bit input and the 72/256-bit outputs that
// the paper prints. Combinational.
module appr_bsn
  import sc_pkg::ss_cfg_t;
#(
  parameter int unsigned IN_W  = 576,
  parameter int unsigned M1    = 9,
  parameter int unsigned L1    = 64,
  parameter int unsigned C1    = 0,
  parameter int unsigned S1    = 2,
  parameter int unsigned OUT_W = 256
) (
  input  logic [IN_W-1:0]  din,   // unsorted thermometer bits
  input  ss_cfg_t          cfg,   // clip/stride of the second stage
  output logic [OUT_W-1:0] dout   // approximate accumulation result
);
  localparam int unsigned O1   = (L1 - 2 * C1) / S1;
  localparam int unsigned S2_W = M1 * O1;

  localparam ss_cfg_t CFG1 = '{clip: 9'(C1), stride: 4'(S1)};

  logic [M1*O1-1:0] s1_out;
  logic [S2_W-1:0]  s2_sorted;

  // Stage 1: M1 independent sub-BSNs with fixed sub-sampling.
  for (genvar g = 0; g < M1; g++) begin : g_s1
    logic [L1-1:0] sorted;
    bsn_sorter #(.W(L1)) u_sort (.din(din[g*L1 +: L1]), .dout(sorted));
    bsn_subsample #(.IN_W(L1), .OUT_W(O1)) u_ss (
      .din(sorted), .cfg(CFG1), .dout(s1_out[g*O1 +: O1]));
  end

  // Stage 2: one sub-BSN over all stage-1 outputs, run-time sub-sampling.
  bsn_sorter #(.W(S2_W)) u_sort2 (.din(s1_out), .dout(s2_sorted));
  bsn_subsample #(.IN_W(S2_W), .OUT_W(OUT_W)) u_ss2 (
    .din(s2_sorted), .cfg(cfg), .dout(dout));

  initial begin
    assert (M1 * L1 == IN_W) else $error("appr_bsn: M1*L1 must equal IN_W");
    assert ((L1 - 2 * C1) % S1 == 0) else $error("appr_bsn: stage-1 window must divide");
  end
endmodule
