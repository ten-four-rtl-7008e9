// tfr_ksa_tb: self-checking test of the Kogge-Stone adder at its default
// 24-bit width and at an odd width (17). Random operands, carry-in and
// corner cases (all ones plus carry-in, which ripples through every prefix
// level) are compared with {cout, sum} = a + b + cin worked out with integer
// arithmetic. Combinational; one check per vector; a watchdog ends the run.
module tfr_ksa_tb;
  int checks = 0, failures = 0;
  logic [23:0] a, b, s;
  logic [16:0] a2, b2, s2;
  logic ci, co, co2;

  tfr_ksa               u24 (.a(a), .b(b), .cin(ci), .sum(s), .cout(co));
  tfr_ksa #(.W(17))     u17 (.a(a2), .b(b2), .cin(ci), .sum(s2), .cout(co2));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [24:0] e;
    logic [17:0] e2;
    for (int t = 0; t < 5000; t++) begin
      a = 24'($urandom); b = 24'($urandom); ci = 1'($urandom);
      a2 = 17'($urandom); b2 = 17'($urandom);
      if (t == 0) begin a = '1; b = '0; ci = 1; a2 = '1; b2 = '0; end
      if (t == 1) begin a = '1; b = '1; ci = 1; a2 = '1; b2 = '1; end
      if (t == 2) begin a = 24'h555555; b = 24'hAAAAAA; ci = 1; a2 = 17'h15555; b2 = 17'h0AAAA; end
      #1;
      e  = 25'(a) + 25'(b) + 25'(ci);
      e2 = 18'(a2) + 18'(b2) + 18'(ci);
      checks += 2;
      if ({co, s} !== e) begin failures++; if (failures < 5) $display("W24 %h+%h+%b got %h exp %h", a, b, ci, {co, s}, e); end
      if ({co2, s2} !== e2) begin failures++; if (failures < 5) $display("W17 mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
