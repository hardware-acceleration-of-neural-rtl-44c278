// grid_scale: computes the grid scale of one resolution level,
//   scale = Nmin * b^level        (unsigned Q16.16)
// from the base resolution Nmin (integer) and the per-level growth factor b
// (Q16.16).
//
// It works by repeated multiplication: on start it loads Nmin and multiplies
// by b once per cycle, `level` times, truncating each product back to Q16.16.
// The scale only changes when the NFP is reconfigured, so one multiplier used
// over several cycles is enough. Timing: done pulses level+1 cycles after
// start (one cycle for level 0); scale holds its value until the next start.
// The function (scale from base resolution and level) follows the
// architecture; the iterative circuit, the formats and the start/done
// handshake are this design's choice.
// Lint note: the product's low 16 bits (truncated fraction) and top 16 bits
// (beyond Q16.16 range; valid configurations stay below) are unused on purpose.
module grid_scale
  import nfp_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        base_res,
  input  logic [31:0]        growth,
  input  logic [3:0]         level,
  output logic [SCALE_W-1:0] scale,
  output logic               busy,
  output logic               done
);
  logic [3:0]  remaining;
  logic [63:0] prod;

  assign prod = 64'(scale) * 64'(growth);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scale     <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      remaining <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        scale     <= {base_res, 16'h0};
        remaining <= level;
        busy      <= 1'b1;
      end else if (busy) begin
        if (remaining == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          scale     <= prod[47:16];
          remaining <= remaining - 1'b1;
        end
      end
    end
  end
endmodule
