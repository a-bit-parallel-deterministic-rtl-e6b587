// tb_table1_examples: the three worked examples of the multiplier at B = 3
// (8-bit streams), run through the complete top level.
//
// For each operand pair the internal X_u and Y_u streams and the product O_u
// are compared with the hand-worked values:
//   X=4, Y=6: X_u 00001111, Y_u 10111110, O_u 00001110 (3/8)
//   X=5, Y=3: X_u 00011111, Y_u 00101010, O_u 00001010 (2/8)
//   X=3, Y=4: X_u 00000111, Y_u 10101010, O_u 00000010 (1/8)
// All other 3-bit pairs are checked to give a product count that matches a
// prefix count of Y_u over the X_b trailing positions. A watchdog ends the
// run if it hangs.
module tb_table1_examples;

  logic [2:0] xb, yb;
  logic [7:0] ou;

  int checks = 0;
  int failures = 0;

  stochastic_multiplier #(.B(3)) dut (.xb(xb), .yb(yb), .ou(ou));

  task automatic check(input int x, input int y,
                       input logic [7:0] exu, input logic [7:0] eyu, input logic [7:0] eou);
    xb = 3'(x); yb = 3'(y);
    #1;
    checks++;
    if (dut.xu !== exu) begin failures++; $display("%0d*%0d X_u %b expected %b", x, y, dut.xu, exu); end
    checks++;
    if (dut.yu !== eyu) begin failures++; $display("%0d*%0d Y_u %b expected %b", x, y, dut.yu, eyu); end
    checks++;
    if (ou !== eou) begin failures++; $display("%0d*%0d O_u %b expected %b", x, y, ou, eou); end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(4, 6, 8'b00001111, 8'b10111110, 8'b00001110);
    check(5, 3, 8'b00011111, 8'b00101010, 8'b00001010);
    check(3, 4, 8'b00000111, 8'b10101010, 8'b00000010);
    for (int x = 0; x < 8; x++) begin
      for (int y = 0; y < 8; y++) begin
        automatic int c = 0;
        xb = 3'(x); yb = 3'(y);
        #1;
        checks++;
        if ($countones(dut.yu) != y) failures++;
        for (int n = 0; n < x; n++) c += int'(dut.yu[n]);
        checks++;
        if ($countones(ou) != c) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
