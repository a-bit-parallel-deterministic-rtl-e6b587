// tb_tcu_decoder: exhaustive self-check of the binary to thermometer decoder.
//
// Two instances are driven with every input value: the 8-bit one used for
// operand X and the 7-bit one used for the low bits of operand Y. The expected
// word is built as (1 << v) - 1, i.e. v ones at the trailing end, and the
// count of ones is checked separately. A 3-bit instance reproduces the X
// streams of the paper's worked examples. A watchdog ends the run if it hangs.
module tb_tcu_decoder;

  logic [7:0]   bin8;
  logic [255:0] tcu8;
  logic [6:0]   bin7;
  logic [127:0] tcu7;

  int checks = 0;
  int failures = 0;

  tcu_decoder #(.W(8)) dut8 (.bin(bin8), .tcu(tcu8));
  tcu_decoder #(.W(7)) dut7 (.bin(bin7), .tcu(tcu7));

  logic [2:0] bin3;
  logic [7:0] tcu3;
  tcu_decoder #(.W(3)) dut3 (.bin(bin3), .tcu(tcu3));

  task automatic check3(input logic [2:0] v, input logic [7:0] e);
    bin3 = v;
    #1;
    checks++;
    if (tcu3 !== e) begin
      failures++;
      $display("W=3 v=%0d got %b expected %b", v, tcu3, e);
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
    logic [256:0] one;
    for (int v = 0; v < 256; v++) begin
      bin8 = 8'(v);
      bin7 = 7'(v);
      #1;
      one = (257'd1 << v) - 257'd1;
      checks++;
      if (tcu8 !== one[255:0]) begin
        failures++;
        $display("W=8 v=%0d got %h", v, tcu8);
      end
      checks++;
      if ($countones(tcu8) != v) failures++;
      if (v < 128) begin
        checks++;
        if (tcu7 !== one[127:0]) begin
          failures++;
          $display("W=7 v=%0d got %h", v, tcu7);
        end
      end
    end
    // X operands of the paper's worked examples (B = 3).
    check3(3'd4, 8'b00001111);
    check3(3'd5, 8'b00011111);
    check3(3'd3, 8'b00000111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
