// tag_match: recogniser for one fixed tag on the pre-decoded character lines.
//
// The tag "<xy>" (or "</xy>" when CLOSE is set) is a fixed string of 4 (or 5)
// characters. One flip-flop per character but the last records that the
// string so far has just been seen: stage 0 is set by the '<' line, stage k by
// stage k-1 together with the line of character k. Each comparison is a
// single decoded line, a 1-bit compare. The stages advance only on clocks
// that carry a character (valid), so idle clocks inside the stream change
// nothing.
//
// match is combinational: it is high in the clock where the final '>' is on
// the decoder lines, the previous characters completed the tag, and en is
// high. en is the enable of the regular-expression step this parser belongs
// to (the previous step is active), sampled at the '>'.
//
// The chain of per-character 1-bit comparators follows the paper's character
// pre-decoder scheme; gating the result with en at the final character is
// this design's reading of the enable input drawn in the paper's diagrams.
module tag_match #(
  parameter xf_pkg::tag_t TAG   = "a0",
  parameter bit           CLOSE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [255:0] dec,
  input  logic         valid,
  input  logic         en,
  output logic         match
);
  import xf_pkg::*;

  localparam int LEN = CLOSE ? 5 : 4;
  localparam logic [7:0] C0 = CH_LT;
  localparam logic [7:0] C1 = CLOSE ? CH_SLASH : TAG[15:8];
  localparam logic [7:0] C2 = CLOSE ? TAG[15:8] : TAG[7:0];
  localparam logic [7:0] C3 = CLOSE ? TAG[7:0]  : CH_GT;
  localparam logic [7:0] C4 = CH_GT;
  localparam logic [7:0] CHARS [5] = '{C0, C1, C2, C3, C4};

  logic [LEN-2:0] stage_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_q <= '0;
    end else if (valid) begin
      stage_q[0] <= dec[CHARS[0]];
      for (int k = 1; k < LEN - 1; k++)
        stage_q[k] <= stage_q[k-1] && dec[CHARS[k]];
    end
  end

  assign match = valid && en && stage_q[LEN-2] && dec[CHARS[LEN-1]];

endmodule
