// challenge_register_tb: self-checking testbench of the challenge register.
//
// Random load / reload / hold cycles against a register model kept here,
// including load and reload together (load wins) and reset to zero.
module challenge_register_tb;

  int checks = 0, failures = 0;
  logic        clk = 0, rst_n = 0, load = 0, reload = 0;
  logic [63:0] init_chal = '0, l1_resp = '0, chal, model;

  always #5 clk = ~clk;

  challenge_register #(.W(64)) dut (.clk, .rst_n, .load, .init_chal, .reload, .l1_resp, .chal);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (chal !== '0) begin failures++; $display("FAIL reset value"); end
    rst_n = 1;
    model = '0;
    for (int t = 0; t < 500; t++) begin
      load      = ($urandom % 4) == 0;
      reload    = ($urandom % 3) == 0;
      init_chal = {$urandom, $urandom};
      l1_resp   = {$urandom, $urandom};
      if (load)        model = init_chal;
      else if (reload) model = l1_resp;
      @(negedge clk);
      checks++;
      if (chal !== model) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d load=%0b reload=%0b got %016h exp %016h",
                                    t, load, reload, chal, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
