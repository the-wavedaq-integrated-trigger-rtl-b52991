// sync_fifo: single-clock first-in first-out buffer.
//
// A circular memory of DEPTH words of W bits with write and read pointers
// one bit wider than the address, so full and empty are told apart.  The
// head word is always visible on rdata (show-ahead); `pop` removes it.
// `count` tells the number of words held, which readers use to reserve
// room before they issue requests.  Writing when full or reading when
// empty is a protocol error and is checked by assertions.
//
// Timing: a word pushed at clock t is on rdata from t+1.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 64,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  assign count = wptr - rptr;
  assign empty = (wptr == rptr);
  assign full  = (count == (AW+1)'(DEPTH));
  assign rdata = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst) begin
      assert (!(push && full && !pop)) else $error("sync_fifo: push while full");
      assert (!(pop && empty))         else $error("sync_fifo: pop while empty");
    end
  end
endmodule
