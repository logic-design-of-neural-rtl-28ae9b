// tb_relu -- self-checking test of the ReLU unit, enabled and bypassed,
// over every 8-bit input value.
module tb_relu;

  int checks = 0;
  int failures = 0;

  logic signed [7:0] x, y_on, y_off;
  relu #(.W(8), .ENABLE(1'b1)) u_on  (.x(x), .y(y_on));
  relu #(.W(8), .ENABLE(1'b0)) u_off (.x(x), .y(y_off));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      x = 8'(v);
      #1;
      checks += 2;
      if (int'(y_on) != ((v < 0) ? 0 : v)) begin
        failures++;
        $display("FAIL relu x=%0d y=%0d", v, y_on);
      end
      if (int'(y_off) != v) begin
        failures++;
        $display("FAIL bypass x=%0d y=%0d", v, y_off);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
