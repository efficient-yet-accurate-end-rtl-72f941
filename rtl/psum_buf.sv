// psum_buf: partial-sum buffer of the spatial-temporal BSN.
//
// Holds SLOTS slots of SLOT_W bits (default 8 x 72 = 576 bits, one BSN input
// width). Each partial pass writes its 72-bit partial sum into slot wr_idx;
// the re-scaled residual is written into the last slot. The whole buffer is
// read back as one flat vector, slot s at bits [s*SLOT_W +: SLOT_W], and feeds
// the final pass of the BSN. A slot that has not been written since `clear`
// reads as alternating 1/0, which is worth zero, so unused slots do not
// disturb the sum. The 8 x 72-bit organisation is read from the source paper's
// figure; the filler and the residual slot are this design's choice.
// Timing: writes take effect at the clock edge; reads are combinational.
module psum_buf #(
  parameter int unsigned SLOTS  = 8,
  parameter int unsigned SLOT_W = 72,
  parameter int unsigned IDX_W  = $clog2(SLOTS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,    // mark all slots empty
  input  logic                    wr_en,    // write a partial sum
  input  logic [IDX_W-1:0]        wr_idx,
  input  logic [SLOT_W-1:0]       wr_data,
  input  logic                    res_wr,   // write the residual slot
  input  logic [SLOT_W-1:0]       res_data,
  output logic [SLOTS*SLOT_W-1:0] rd_data   // all slots, flat
);
  logic [SLOT_W-1:0] mem [SLOTS];
  logic [SLOTS-1:0]  valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else begin
      if (clear) valid <= '0;
      if (wr_en) valid[wr_idx] <= 1'b1;
      if (res_wr) valid[SLOTS-1] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_data;
    if (res_wr) mem[SLOTS-1] <= res_data;
  end

  always_comb begin
    for (int unsigned s = 0; s < SLOTS; s++)
      for (int unsigned b = 0; b < SLOT_W; b++)
        rd_data[s*SLOT_W + b] = valid[s] ? mem[s][b] : b[0];
  end

  always_ff @(posedge clk) begin
    if (rst_n && wr_en && res_wr)
      assert (wr_idx != IDX_W'(SLOTS - 1))
        else $error("psum_buf: partial sum and residual written to the same slot");
  end
endmodule
