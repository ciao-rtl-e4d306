// sync_fifo: single-clock FIFO used for the request (ReqQ), write (WQ) and
// response (RespQ) queues between the SM's on-chip memory and L2. Push and pop
// in the same cycle are allowed; data at the head is available combinationally.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push && !full) begin
        wp <= (int'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) begin
        rp <= (int'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
      end
      count <= count + $bits(count)'(push && !full) - $bits(count)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) if (push && !full) mem[wp] <= din;

  assign dout  = mem[rp];
  assign empty = (count == 0);
  assign full  = (int'(count) == DEPTH);
endmodule
