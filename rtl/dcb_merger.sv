// dcb_merger: event-packet merge of the Data Concentrator Board.
//
// The DCB receives the readout serial links of all WaveDREAM boards of a
// crate and combines them into a single output toward the backend (the
// Gigabit Ethernet link, not modelled).  This block merges N_IN valid/ready
// packet streams into one: when no packet is in progress it grants the
// next input, in round-robin order after the last one served, that has a
// beat waiting, and it then forwards that input alone until the beat
// marked `last` has been accepted, so packets are never interleaved.
// Back-pressure on the output stalls the granted input.  The round-robin
// order is this design's choice.
//
// Timing: granting costs one clock per packet; after that one beat per
// clock passes combinationally from the granted input to the output.
module dcb_merger #(
  parameter int N_IN   = 16,
  parameter int DATA_W = 192,
  localparam int SW    = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N_IN-1:0]             in_valid,
  output logic [N_IN-1:0]             in_ready,
  input  logic [N_IN-1:0]             in_last,
  input  logic [N_IN-1:0][DATA_W-1:0] in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic                        out_last,
  output logic [DATA_W-1:0]           out_data,
  output logic [SW-1:0]               out_src      // input the beat came from
);
  logic          locked;
  logic [SW-1:0] sel;
  logic [SW-1:0] next_sel;
  logic          found;
  logic [SW:0]   idx;

  // Round-robin search starting after the last input served.
  always_comb begin
    found    = 1'b0;
    next_sel = sel;
    idx      = '0;
    for (int k = 1; k <= N_IN; k++) begin
      idx = (SW+1)'(sel) + (SW+1)'(k);
      if (idx >= (SW+1)'(N_IN)) idx = idx - (SW+1)'(N_IN);
      if (!found && in_valid[idx[SW-1:0]]) begin
        found    = 1'b1;
        next_sel = idx[SW-1:0];
      end
    end
  end

  assign out_valid = locked && in_valid[sel];
  assign out_last  = in_last[sel];
  assign out_data  = in_data[sel];
  assign out_src   = sel;

  always_comb begin
    in_ready = '0;
    in_ready[sel] = locked && out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0;
      sel    <= SW'(N_IN - 1);
    end else if (!locked) begin
      if (found) begin
        locked <= 1'b1;
        sel    <= next_sel;
      end
    end else if (out_valid && out_ready && out_last) begin
      locked <= 1'b0;
    end
  end

  // Stream rule: a beat offered and not taken stays unchanged.
  logic              prev_stall;
  logic [DATA_W-1:0] prev_data;
  always_ff @(posedge clk) begin
    if (rst) begin
      prev_stall <= 1'b0;
      prev_data  <= '0;
    end else begin
      prev_stall <= out_valid && !out_ready;
      prev_data  <= out_data;
      if (prev_stall)
        assert (out_valid && out_data == prev_data)
          else $error("dcb_merger: output beat changed while stalled");
    end
  end
endmodule
