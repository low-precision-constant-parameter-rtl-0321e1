// tb_red63: exhaustive test of the 6:3 reduction cell.  For all 64 input
// patterns and both carry-in values it checks that {cout, cnt_lo} is the
// number of ones and that the S,S cell passes the incoming carry through.
module tb_red63;
  logic [5:0] x;
  logic       cin, hid, cout;
  logic [1:0] lo;
  int checks = 0, failures = 0;

  red63 dut (.x(x), .cin(cin), .hid(hid), .cnt_lo(lo), .cout(cout));

  initial begin
    for (int v = 0; v < 128; v++) begin
      {cin, x} = 7'(v);
      #1;
      checks++;
      if ({cout, lo} != 3'($countones(x)) || hid != cin) begin
        failures++;
        $display("FAIL x=%b cin=%b -> cnt=%0d hid=%b", x, cin, {cout, lo}, hid);
      end
    end
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
