// weighted_sum: per-board weighted sum of the pedestal-subtracted samples.
//
// Second step of the trigger chain.  Each of the N signed samples is
// multiplied by its unsigned programmable weight (gain equalisation of the
// detector channels) and the products are added.  Weights are slow-control
// registers.  The widths and the two-stage pipeline are this design's
// choice; the sum is wide enough never to overflow.
//
// Timing: products are registered, then the sum: sum is valid two clocks
// after x.
module weighted_sum #(
  parameter int N     = 16,
  parameter int IN_W  = 13,
  parameter int WGT_W = 8,
  localparam int OUT_W = IN_W + WGT_W + $clog2(N) + 1
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic signed [N-1:0][IN_W-1:0] x,
  input  logic        [N-1:0][WGT_W-1:0] w,
  output logic signed [OUT_W-1:0]       sum
);
  localparam int PROD_W = IN_W + WGT_W + 1;

  logic signed [PROD_W-1:0] prod [N];
  logic signed [OUT_W-1:0]  acc;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (rst) prod[i] <= '0;
      else     prod[i] <= PROD_W'($signed(x[i]) * $signed({1'b0, w[i]}));
    end
  end

  always_comb begin
    acc = '0;
    for (int i = 0; i < N; i++) acc = acc + OUT_W'(prod[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) sum <= '0;
    else     sum <= acc;
  end
endmodule
