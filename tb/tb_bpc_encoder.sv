// tb_bpc_encoder: self-check of the bit-position correlation encoder.
//
// Part 1 drives a B = 3 instance with the three Y operands of the paper's
// worked examples (6, 3, 4) and compares Y_u with the printed streams
// 10111110, 00101010 and 10101010. Part 2 drives the B = 8 instance with all
// 256 operands, builds the thermometer input in the testbench, and checks
// that Y_u holds exactly Y_b ones and matches a reference that places them
// pair by pair from the leading end. A watchdog ends the run if it hangs.
module tb_bpc_encoder;

  logic         msb3, msb8;
  logic [3:0]   yi3;
  logic [7:0]   yu3;
  logic [127:0] yi8;
  logic [255:0] yu8;

  int checks = 0;
  int failures = 0;

  bpc_encoder #(.B(3)) dut3 (.msb(msb3), .yi(yi3), .yu(yu3));
  bpc_encoder #(.B(8)) dut8 (.msb(msb8), .yi(yi8), .yu(yu8));

  // Reference for B = 8: walk the stream from the top, two positions per
  // pair; the pair's upper bit is set if msb or the pair index is covered by
  // the low bits, its lower bit only if both.
  function automatic logic [255:0] ref_yu(input int y);
    logic [255:0] r = '0;
    int lo = y % 128;
    int m  = y / 128;
    for (int p = 0; p < 128; p++) begin
      // pair p covers positions 255-2p (upper) and 254-2p (lower)
      if (p == 0) begin
        r[255] = (m == 1);
      end else begin
        r[255-2*p] = (m == 1) || (p <= lo);
        r[254-2*p] = (m == 1) && (p <= lo);
      end
    end
    return r;
  endfunction

  task automatic drive3(input int y);
    msb3 = y[2];
    yi3  = 4'((5'd1 << y[1:0]) - 5'd1);
    #1;
  endtask

  task automatic check3(input int y, input logic [7:0] expect_yu);
    drive3(y);
    checks++;
    if (yu3 !== expect_yu) begin
      failures++;
      $display("B=3 Y=%0d got %b expected %b", y, yu3, expect_yu);
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
    check3(6, 8'b10111110);
    check3(3, 8'b00101010);
    check3(4, 8'b10101010);
    for (int y = 0; y < 8; y++) begin
      drive3(y);
      checks++;
      if ($countones(yu3) != y) begin
        failures++;
        $display("B=3 Y=%0d count %0d", y, $countones(yu3));
      end
    end
    for (int y = 0; y < 256; y++) begin
      logic [128:0] t;
      msb8 = y[7];
      t = (129'd1 << y[6:0]) - 129'd1;
      yi8 = t[127:0];
      #1;
      checks++;
      if ($countones(yu8) != y) begin
        failures++;
        $display("B=8 Y=%0d count %0d", y, $countones(yu8));
      end
      checks++;
      if (yu8 !== ref_yu(y)) begin
        failures++;
        $display("B=8 Y=%0d pattern mismatch", y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
