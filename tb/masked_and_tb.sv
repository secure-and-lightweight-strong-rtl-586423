// masked_and_tb: exhaustive check of the two-share masked AND.
// For all 32 input combinations: z1^z2 must equal (x1^x2)&(y1^y2), and
// toggling r must toggle both output shares (remasking).
module masked_and_tb;
  logic x1, x2, y1, y2, r, z1, z2;
  logic z1_0, z2_0;
  int checks = 0, failures = 0;

  masked_and dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      {x1, x2, y1, y2, r} = 5'(v);
      #1;
      checks++;
      if ((z1 ^ z2) !== ((x1 ^ x2) & (y1 ^ y2))) begin
        failures++;
        $display("FAIL v=%0d z=%b%b", v, z1, z2);
      end
      if (r == 1'b0) begin
        z1_0 = z1; z2_0 = z2;
        r = 1'b1;
        #1;
        checks++;
        if (z1 !== ~z1_0 || z2 !== ~z2_0) begin
          failures++;
          $display("FAIL remask v=%0d", v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
