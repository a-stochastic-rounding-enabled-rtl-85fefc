// acc_register: the accumulator register that closes the MAC loop.
//
// Holds the running sum s_w, e_w, m_w. On a clock edge it loads d when en is high; clr (which
// takes priority) loads +0 to start a new dot product, and rst_n (active low, synchronous)
// also clears it. The design names this register but gives no control signals; the enable
// and clear are this implementation's choice so a controller can hold or restart a sum.
// q is the registered value, available one cycle after d was presented with en high.
module acc_register #(
  parameter int unsigned WIDTH = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  always_ff @(posedge clk) begin
    if (!rst_n || clr) q <= '0;
    else if (en)       q <= d;
  end

endmodule
