// tb_ap_load_reg: self-checking test of the activation package register.
//
// Shifts random packages in serially, most significant bit first, and checks
// after every enabled cycle that the register holds exactly the bits sent so
// far; that the full package appears after exactly WIDTH enabled cycles and
// not before; that the register holds while load_en is low (even with ap_in
// toggling); and that reset clears it.  Run at the default 32-bit width.
module tb_ap_load_reg;
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned W = 32;

  logic         clk = 0, rst = 1, load_en = 0, ap_in = 0;
  logic [W-1:0] ap_out;
  int           checks = 0, failures = 0;

  ap_load_reg #(.WIDTH(W)) dut (.clk, .rst, .load_en, .ap_in, .ap_out);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] exp, input string what);
    checks++;
    if (ap_out !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, ap_out, exp);
    end
  endtask

  logic [W-1:0] model = '0;   // independent model of the shift register

  task automatic load(input logic [W-1:0] pkg);
    logic [W-1:0] sent;
    for (int b = W-1; b >= 0; b--) begin
      @(negedge clk);
      load_en = 1; ap_in = pkg[b];
      @(posedge clk); #1;
      model = {model[W-2:0], pkg[b]};
      sent  = model;
      check(model, $sformatf("after bit %0d", W-1-b));
      // the whole package is not there until the last bit
      if (b != 0 && pkg != sent) begin
        checks++;
        if (ap_out == pkg) begin failures++; $display("FAIL package complete too early"); end
      end
    end
    @(negedge clk); load_en = 0;
  endtask

  initial begin
    logic [W-1:0] pkg;
    repeat (2) @(posedge clk);
    #1 check('0, "reset value");
    @(negedge clk) rst = 0;

    // The correct package of the example and some random ones.
    for (int n = 0; n < 6; n++) begin
      pkg = (n == 0) ? 32'he4e4e46c : $urandom;
      load(pkg);
      #1 check(pkg, "full package");
      // hold while LOAD_en is low
      for (int c = 0; c < 20; c++) begin
        @(negedge clk) ap_in = 1'($urandom);
        @(posedge clk); #1 check(pkg, "hold with LOAD_en low");
      end
    end

    // reset clears
    @(negedge clk) rst = 1;
    @(posedge clk); #1 check('0, "reset clears");
    model = '0;
    @(negedge clk) rst = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
