// tb_acc_register: random enable, clear and data against a one-line model of the register.
// q must change only on a clock edge: to 0 on reset or clear, to d when enabled, else hold.
module tb_acc_register;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [11:0] d, q, model;
  int checks = 0, failures = 0;

  acc_register dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .d(d), .q(q));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = 12'hABC;
    @(posedge clk); #1;
    model = '0;
    checks++;
    if (q !== model) begin failures++; $display("reset: q=%h", q); end
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      en  = ($urandom_range(0, 3) != 0);
      clr = ($urandom_range(0, 15) == 0);
      d   = 12'($urandom);
      #4;
      checks++;
      if (q !== model) begin failures++; $display("q changed before the edge"); end
      @(posedge clk);
      if (clr) model = '0;
      else if (en) model = d;
      #1;
      checks++;
      if (q !== model) begin
        failures++;
        if (failures < 10) $display("cycle %0d: q=%h expected %h", i, q, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
