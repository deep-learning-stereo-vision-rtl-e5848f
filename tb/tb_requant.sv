// tb_requant: checks the multiply-shift rescale against an integer
// reference on random and edge-case accumulators, with and without ReLU.
module tb_requant;
  logic signed [23:0] acc;
  logic [7:0] m;
  logic [4:0] h;
  logic relu;
  logic signed [7:0] y;
  int checks = 0, failures = 0;

  requant #(.ACC_W(24), .M_W(8), .H_W(5)) dut (.*);

  function automatic int ref_y(longint a, int mm, int hh, bit r);
    longint p = (a * mm) >>> hh;
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    if (r && p < 0) p = 0;
    return int'(p);
  endfunction

  task automatic check_one(longint a, int mm, int hh, bit r);
    acc = 24'(a); m = 8'(mm); h = 5'(hh); relu = r;
    #1;
    checks++;
    if (int'(y) != ref_y(a, mm, hh, r)) begin
      failures++;
      $display("acc=%0d m=%0d h=%0d relu=%0b: y=%0d exp %0d", a, mm, hh, r, y, ref_y(a, mm, hh, r));
    end
  endtask

  initial begin
    check_one(-8388608, 255, 0, 0);
    check_one(8388607, 255, 31, 0);
    check_one(-1, 1, 4, 0);          // arithmetic shift keeps -1
    check_one(300, 1, 1, 0);         // saturates high
    check_one(-300, 1, 1, 1);        // relu clamps
    for (int i = 0; i < 2000; i++)
      check_one($signed(24'($urandom)) >>> $urandom_range(0, 16), $urandom_range(0, 255),
                $urandom_range(0, 31), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
