// addr_lifo: last-in first-out store of the read addresses of one window.
//
// The SISO reads a window in increasing order and writes its results back
// one window later in decreasing order, so the read addresses (memory word,
// bank identifiers, A/B swap flag) are pushed during the forward pass and
// popped in reverse for the write-back.  Since the next window is being
// pushed while the previous one is popped, the LIFO has two window-sized
// stacks used alternately: `flip` (asserted with the last push of a window)
// hands the filled stack over to the pop side.  The LIFO itself follows the
// architecture; the two-stack organisation is this design's choice.
//
// Timing: push/pop take effect at the clock edge; dout shows the top of the
// pop stack combinationally.
// rst_n is reported by lint as both an asynchronous and a synchronous
// signal; the synchronous use is only the `disable iff` of the assertions
// at the end of this file.  All flip-flops reset asynchronously.
module addr_lifo #(
  parameter int unsigned DW    = 20,
  parameter int unsigned DEPTH = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic          flip,
  input  logic [DW-1:0] din,
  input  logic          pop,
  output logic [DW-1:0] dout,
  output logic          empty
);
  localparam int unsigned AW = $clog2(DEPTH + 1);
  logic [DW-1:0] mem [2][DEPTH];
  logic          wb;
  logic [AW-1:0] wp, rp;

  assign empty = (rp == 0);
  assign dout  = mem[~wb][(AW-1)'(rp - 1'b1)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 1'b0;
      wp <= '0;
      rp <= '0;
    end else if (clear) begin
      wb <= 1'b0;
      wp <= '0;
      rp <= '0;
    end else begin
      if (pop && !empty) rp <= rp - 1'b1;
      if (push) wp <= wp + 1'b1;
      if (flip) begin
        wb <= ~wb;
        wp <= '0;
        rp <= wp + AW'(push);
      end
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wb][wp[AW-2:0]] <= din;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> wp < AW'(DEPTH));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
