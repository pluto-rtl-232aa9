// tb_pluto_ff_buffer: self-checking test of the FF buffer and its
// matchline-controlled switches: random capture / clear sequences against a
// reference register; matched bits must take the sensed value (0 or 1),
// unmatched bits must hold.
// The update rule is the one the FF buffer is defined by: on a sense pulse a
// flip-flop copies its sense amplifier only where its matchline is high.
// The clear at query start is this design's choice. Rows are 96 bits here.
module tb_pluto_ff_buffer;
  localparam int unsigned RB = 96;
  logic clk = 0, rst_n = 0, clear, capture;
  logic [RB-1:0] ml, sa, q, model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pluto_ff_buffer #(.ROW_BITS(RB)) dut (.clk, .rst_n, .clear, .capture, .matchlines(ml), .sa_data(sa), .q);

  initial begin
    clear = 0; capture = 0; ml = '0; sa = '0; model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (q !== '0) begin failures++; $display("FAIL reset"); end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      clear   = ($urandom_range(0, 19) == 0);
      capture = ($urandom_range(0, 2) != 0);
      ml      = {$urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom};
      sa      = {$urandom, $urandom, $urandom};
      @(posedge clk);
      if (clear)        model = '0;
      else if (capture) model = (model & ~ml) | (sa & ml);
      #1;
      checks++;
      if (q !== model) begin
        failures++;
        $display("FAIL step %0d: q=%h exp %h", n, q, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
