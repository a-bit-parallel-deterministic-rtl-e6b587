// tb_unary_and_array: self-check of the N-bit AND array.
//
// Drives the paper's three worked example stream pairs through an N = 8
// instance and compares with the printed products 00001110, 00001010 and
// 00000010. Then drives the N = 256 instance with random streams and checks
// every output bit against a bit-by-bit truth table lookup. A watchdog ends
// the run if it hangs.
module tb_unary_and_array;

  logic [7:0]   xa, ya, oa;
  logic [255:0] xb, yb, ob;

  int checks = 0;
  int failures = 0;

  unary_and_array #(.N(8))   dut8   (.xu(xa), .yu(ya), .ou(oa));
  unary_and_array            dut256 (.xu(xb), .yu(yb), .ou(ob));

  task automatic check8(input logic [7:0] x, input logic [7:0] y, input logic [7:0] e);
    xa = x; ya = y;
    #1;
    checks++;
    if (oa !== e) begin
      failures++;
      $display("N=8 %b & %b got %b expected %b", x, y, oa, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check8(8'b00001111, 8'b10111110, 8'b00001110);
    check8(8'b00011111, 8'b00101010, 8'b00001010);
    check8(8'b00000111, 8'b10101010, 8'b00000010);
    for (int t = 0; t < 200; t++) begin
      for (int w = 0; w < 8; w++) begin
        xb[32*w +: 32] = $urandom;
        yb[32*w +: 32] = $urandom;
      end
      #1;
      for (int n = 0; n < 256; n++) begin
        logic e;
        case ({xb[n], yb[n]})
          2'b11:   e = 1'b1;
          default: e = 1'b0;
        endcase
        checks++;
        if (ob[n] !== e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
