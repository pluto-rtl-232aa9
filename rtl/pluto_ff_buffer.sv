// pluto_ff_buffer: the FF buffer of pLUTo-BSA with its matchline-controlled
// switches.
//
// One flip-flop sits behind every sense amplifier of the pLUTo-enabled row
// buffer, connected through a switch that the matchline of that bit position
// closes. Whenever the sense amplifiers hold a freshly sensed row (`capture`),
// every bit whose matchline is high takes the sense-amplifier value; all other
// bits keep what they hold. After a full Row Sweep the buffer therefore holds,
// in every element position, the LUT entry selected by that position's index:
// the LUT query output vector.
//
// Interface: clear empties the buffer at the start of a query (this design's
// choice: elements whose index matches no swept row read back as zero);
// capture / matchlines / sa_data as above; q is the buffer content.
// Timing: one clock per capture; q is registered.
module pluto_ff_buffer #(
  parameter int unsigned ROW_BITS = 65536
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                capture,
  input  logic [ROW_BITS-1:0] matchlines,
  input  logic [ROW_BITS-1:0] sa_data,
  output logic [ROW_BITS-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       q <= '0;
    else if (clear)   q <= '0;
    else if (capture) q <= (q & ~matchlines) | (sa_data & matchlines);
  end

endmodule
