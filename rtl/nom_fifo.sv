// nom_fifo: small synchronous FIFO used for the CCU's copy-request queue and
// the vault controller's Copy Q and R/W Q.
//
// A pushed entry can be popped from the next cycle on; dout shows the oldest
// entry whenever empty is low. Push while full and pop while empty are
// ignored (and flagged by assertions). DEPTH must be a power of two.
// The paper names the queues and their FIFO order; depth and the circular
// buffer are choices of this implementation.
module nom_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    push,
  input  T        din,
  input  logic    pop,
  output T        dout,
  output logic    full,
  output logic    empty,
  output logic [AW:0] count
);

  T            mem [DEPTH];
  logic [AW:0] wp, rp;

  assign count = wp - rp;
  assign full  = count == (AW+1)'(DEPTH);
  assign empty = count == '0;
  assign dout  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) begin
        mem[wp[AW-1:0]] <= din;
        wp <= wp + 1'b1;
      end
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
