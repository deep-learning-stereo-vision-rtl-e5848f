// tb_view_mux: checks that the multiplexer returns the left image in the
// direct pass and the right image in the swapped pass.
module tb_view_mux;
  logic sel;
  logic [7:0] left_pix, right_pix, ref_pix;
  int checks = 0, failures = 0;

  view_mux dut (.*);

  initial begin
    for (int i = 0; i < 200; i++) begin
      sel = 1'($urandom);
      left_pix = 8'($urandom);
      right_pix = 8'($urandom);
      #1;
      checks++;
      if (ref_pix !== (sel ? right_pix : left_pix)) begin
        failures++;
        $display("sel=%0b l=%h r=%h out=%h", sel, left_pix, right_pix, ref_pix);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
