// tb_requantizer -- self-checking test of the requantiser.
//
// A 14-bit input with scale factor 2048/2**16 = 1/32 is swept over every
// input value, and a second instance with factor 2559/2**16 over the same
// range. Results are compared with the integer model
// clamp(floor((x*mult + 2**15) / 2**16), -128, 127); both the saturation
// and the in-range paths, and the sat flag, are checked.
module tb_requantizer;

  int checks = 0;
  int failures = 0;
  int sat_seen = 0;

  logic signed [13:0] x;
  logic signed [7:0]  y_a, y_b;
  logic               s_a, s_b;

  requantizer #(.IN_W(14), .OUT_W(8), .MULT_W(16), .MULT(16'sd2048), .SHIFT(16))
    u_a (.x(x), .y(y_a), .sat(s_a));
  requantizer #(.IN_W(14), .OUT_W(8), .MULT_W(16), .MULT(16'sd2559), .SHIFT(16))
    u_b (.x(x), .y(y_b), .sat(s_b));

  function automatic longint model(longint v, longint m, output bit s);
    longint p = v * m + 32768;
    longint q = (p >= 0) ? p / 65536 : -((-p + 65535) / 65536);
    s = 0;
    if (q > 127) begin q = 127; s = 1; end
    if (q < -128) begin q = -128; s = 1; end
    return q;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit sa, sb;
    longint ea, eb;
    for (int v = -8192; v < 8192; v++) begin
      x = 14'(v);
      #1;
      ea = model(v, 2048, sa);
      eb = model(v, 2559, sb);
      checks += 4;
      if (longint'(y_a) != ea || s_a != sa) begin
        failures++;
        if (failures < 10) $display("FAIL a x=%0d y=%0d/%0d sat=%0b", v, y_a, ea, s_a);
      end
      if (longint'(y_b) != eb || s_b != sb) begin
        failures++;
        if (failures < 10) $display("FAIL b x=%0d y=%0d/%0d sat=%0b", v, y_b, eb, s_b);
      end
      if (sb) sat_seen++;
    end
    checks++;
    if (sat_seen == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
