// res_rescale: residual re-scaling block.
//
// Aligns the scale of a 16-bit thermometer residual with the scale of the
// partial sums before they are accumulated together, by a factor 2^N:
//  * multiply: the residual is replicated 2^N times (N <= 2 here, so at most
//    64 bits fill one 72-bit buffer slot);
//  * divide: once per cycle, one bit of every pair is kept (the upper one) and
//    the 8-bit pattern 11110000, worth zero, is appended so the stream stays
//    16 bits long; after N cycles the value has been halved N times.
// Both mechanisms are the source paper's. The result is placed at the top of a
// SLOT_W-bit buffer slot and the rest of the slot is filled with alternating
// 1/0 (worth zero), which is this design's choice.
// Timing: `start` loads res and mode; `done` rises 1 cycle later for pass and
// multiply and N+1 cycles later for divide, and stays high until the next start.
module res_rescale
  import sc_pkg::*;
#(
  parameter int unsigned BSL    = 16,
  parameter int unsigned SLOT_W = 72
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,   // load a new residual
  input  logic [BSL-1:0]    res,     // residual, thermometer code
  input  res_mode_e         mode,    // pass, multiply or divide
  input  logic [2:0]        shift,   // N
  output logic              done,    // slot is valid
  output logic [SLOT_W-1:0] slot     // re-scaled residual + zero filler
);
  logic [BSL-1:0] r;
  logic [2:0]     left;
  res_mode_e      mode_q;
  logic [2:0]     shift_q;
  logic           busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r       <= '0;
      left    <= '0;
      mode_q  <= RES_PASS;
      shift_q <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else if (start) begin
      r       <= res;
      mode_q  <= mode;
      shift_q <= shift;
      left    <= (mode == RES_DIV) ? shift : 3'd0;
      busy    <= 1'b1;
      done    <= 1'b0;
    end else if (busy) begin
      if (left != 0) begin
        // keep the upper bit of each pair, append 11110000
        for (int i = 0; i < BSL / 2; i++) r[BSL/2 + i] <= r[2*i + 1];
        r[BSL/2-1:0] <= {{(BSL/4){1'b1}}, {(BSL/4){1'b0}}};
        left <= left - 3'd1;
      end else begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // Slot image: 2^N copies for multiply, one copy otherwise; filler below.
  always_comb begin
    int unsigned copies;
    copies = (mode_q == RES_MUL) ? (1 << ((shift_q > 3'(RES_MUL_MAX)) ? RES_MUL_MAX
                                                                      : int'(shift_q))) : 1;
    for (int unsigned i = 0; i < SLOT_W; i++) slot[i] = i[0];
    for (int unsigned c = 0; c < 4; c++)
      if (c < copies) slot[SLOT_W - 1 - c*BSL -: BSL] = r;
  end
endmodule
