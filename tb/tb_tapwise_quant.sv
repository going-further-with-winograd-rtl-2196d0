// tb_tapwise_quant: self-checking test of the tap-wise quantisation stage.
// Drives random values and shift amounts (right and left shifts) and compares
// with clamp(round_half_up(x / 2^sh)) computed here with integer division.
module tb_tapwise_quant;
  int checks = 0, failures = 0;
  logic signed [15:0] x;
  logic signed [4:0]  sh;
  logic signed [7:0]  y;

  tapwise_quant #(.IW(16), .OW(8), .SW(5)) dut (.x(x), .sh(sh), .y(y));

  function automatic longint ref_q(longint xv, int s);
    longint r;
    if (s > 0) begin
      // floor((x + 2^(s-1)) / 2^s) using division with explicit floor
      longint num, den;
      num = xv + (longint'(1) << (s - 1));
      den = longint'(1) << s;
      r = num / den;
      if ((num % den != 0) && (num < 0)) r = r - 1;
    end else r = xv * (longint'(1) << (-s));
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed cases: rounding at .5, clamping both ways
    x = 16'sd5;    sh = 5'sd1;  #1; checks++; if (y !== 8'sd3)   begin failures++; $display("FAIL 5>>1 %0d", y); end
    x = -16'sd5;   sh = 5'sd1;  #1; checks++; if (y !== -8'sd2)  begin failures++; $display("FAIL -5>>1 %0d", y); end
    x = 16'sd1000; sh = 5'sd2;  #1; checks++; if (y !== 8'sd127) begin failures++; $display("FAIL clamp+ %0d", y); end
    x = -16'sd1000;sh = 5'sd2;  #1; checks++; if (y !== -8'sd128)begin failures++; $display("FAIL clamp- %0d", y); end
    x = 16'sd3;    sh = -5'sd2; #1; checks++; if (y !== 8'sd12)  begin failures++; $display("FAIL 3<<2 %0d", y); end
    for (int n = 0; n < 20000; n++) begin
      x  = 16'($urandom);
      if (n % 2 == 0) x = 16'(int'($urandom_range(0, 600)) - 300);
      sh = 5'(int'($urandom_range(0, 14)) - 3);
      #1;
      checks++;
      if (longint'(y) != ref_q(longint'(x), int'(sh))) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d sh=%0d y=%0d exp=%0d", x, sh, y, ref_q(longint'(x), int'(sh)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
