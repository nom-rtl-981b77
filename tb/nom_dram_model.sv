// nom_dram_model: behavioural stand-in for the DRAM arrays of all banks
// (simulation only, not synthesizable: associative-array storage).
//
// Each bank has a one-cycle port: en/we/addr/wdata in a cycle; a read loads
// the bank's data register rdata at the clock edge and rdata holds it until
// the next read. A word never written reads as pattern(bank, addr), so tests
// know every source value without initialising 2^21 words per bank.
module nom_dram_model
  import nom_pkg::*;
#(
  parameter int unsigned NODES = 256
) (
  input  logic              clk,
  input  logic              en    [NODES],
  input  logic              we    [NODES],
  input  logic [ADDR_W-1:0] addr  [NODES],
  input  logic [LINK_W-1:0] wdata [NODES],
  output logic [LINK_W-1:0] rdata [NODES]
);

  logic [LINK_W-1:0] mem [longint];

  function automatic logic [LINK_W-1:0] pattern(int n, logic [ADDR_W-1:0] a);
    logic [31:0] h;
    h = 32'(n) * 32'd2654435761 ^ 32'(a) * 32'd40503 ^ 32'h5A5A_1234;
    return {8'(n), 3'b101, a, h};
  endfunction

  function automatic longint key(int n, logic [ADDR_W-1:0] a);
    return (longint'(n) << ADDR_W) | longint'(a);
  endfunction

  function automatic logic [LINK_W-1:0] peek(int n, logic [ADDR_W-1:0] a);
    if (mem.exists(key(n, a))) return mem[key(n, a)];
    return pattern(n, a);
  endfunction

  initial for (int n = 0; n < int'(NODES); n++) rdata[n] = '0;

  always @(posedge clk) begin
    for (int n = 0; n < int'(NODES); n++) begin
      if (en[n]) begin
        if (we[n]) mem[key(n, addr[n])] = wdata[n];
        else       rdata[n] <= peek(n, addr[n]);
      end
    end
  end

endmodule
