// prio_encoder: output priority encoder of one profile group.
//
// Each clock, the lowest-numbered profile whose match line is high wins:
// its number comes out on idx with valid high, one clock later. If several
// profiles matched in the same clock, multi is raised with it, telling the
// host that lower-priority matches were masked. With no match, valid is low
// and idx holds its last value.
//
// Interface: req is the group's prof_match vector; idx, valid and multi are
// registered. idx is $clog2(N) bits wide (2 bits for 4 profiles, 4 bits for
// 12).
//
// A priority encoder per group whose output is the matching profile is the
// paper's; the priority order, the registered output and multi are this
// design's.
module prio_encoder #(
  parameter int N = 4,
  parameter int W = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  output logic [W-1:0] idx,
  output logic         valid,
  output logic         multi
);

  logic [W-1:0] idx_d;

  always_comb begin
    idx_d = '0;
    for (int i = N - 1; i >= 0; i--)
      if (req[i]) idx_d = W'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx   <= '0;
      valid <= 1'b0;
      multi <= 1'b0;
    end else begin
      valid <= |req;
      multi <= (req & (req - N'(1))) != '0;
      if (|req) idx <= idx_d;
    end
  end

endmodule
