// tb_sel_mux: self-check of the 12:6 select multiplexer (default N = 6).
// Random pairs of words are applied with both select values; y must be d0
// when sel = 0 and d1 when sel = 1.
module tb_sel_mux;
  int checks = 0, failures = 0;

  logic [5:0] d0, d1, y;
  logic       sel;

  sel_mux dut (.d0(d0), .d1(d1), .sel(sel), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      d0  = 6'($urandom);
      d1  = 6'($urandom);
      sel = 1'(i);
      #1;
      checks++;
      if (y != (sel ? d1 : d0)) begin
        failures++;
        $display("FAIL d0=%0h d1=%0h sel=%0b y=%0h", d0, d1, sel, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
