// jtag_tap_tb: self-checking testbench of the JTAG test access port.
//
// A bit-level JTAG host (TMS/TDI changed on the falling TCK edge, TDO read
// on the rising edge) resets the TAP with five TMS-high cycles and then:
// reads the instruction-capture pattern; checks BYPASS as a one-bit delay;
// writes CONFIG and CHALLENGE with random values and checks both the
// outputs and the values shifted back out; toggles START; and reads RESULT
// for random status inputs. Finally an asynchronous trst_n returns the
// outputs to their reset values.
module jtag_tap_tb;
  import pop_pkg::*;

  int checks = 0, failures = 0;
  logic tck = 0, trst_n = 0, tms = 1, tdi = 0, tdo;
  pop_cfg_t cfg;
  logic [63:0] chal, st_l1_resp = '0;
  logic start_tgl, st_response = 0, st_done = 0, st_busy = 0;

  always #10 tck = ~tck;

  jtag_tap dut (.*);

  task automatic check(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge tck);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clk1(logic m, logic d, output logic o);
    @(negedge tck);
    tms = m;
    tdi = d;
    @(posedge tck);
    o = tdo;
  endtask

  task automatic idle();
    logic o;
    clk1(0, 0, o);
  endtask

  task automatic shift(bit ir, int len, logic [127:0] din, output logic [127:0] dout);
    logic o;
    dout = '0;
    clk1(1, 0, o);                 // SEL_DR
    if (ir) clk1(1, 0, o);         // SEL_IR
    clk1(0, 0, o);                 // CAPTURE
    clk1(0, 0, o);                 // SHIFT
    for (int i = 0; i < len; i++) begin
      clk1(i == len - 1, din[i], o);
      dout[i] = o;
    end
    clk1(1, 0, o);                 // UPDATE
    clk1(0, 0, o);                 // RUN-TEST/IDLE
    #1;                            // let the update settle
  endtask

  initial begin
    logic [127:0] out;
    logic [127:0] v;
    logic o, tg;
    pop_cfg_t c;
    #35 trst_n = 1;
    check("cfg reset value", cfg, CFG_RESET);
    for (int i = 0; i < 5; i++) clk1(1, 0, o);
    idle();
    // IR capture pattern, then load BYPASS explicitly.
    shift(1, 4, 128'hF, out);
    check("IR capture 0001", out[3:0], 4'b0001);
    // BYPASS: one-bit register, first bit out is the captured 0.
    shift(0, 8, 128'hA5, out);
    check("bypass delay", out[7:0], 8'h4A);
    // CONFIG write and read-back.
    for (int t = 0; t < 5; t++) begin
      v = 128'({$urandom, $urandom});
      c = pop_cfg_t'(v[CFG_W-1:0]);
      shift(1, 4, 128'h2, out);
      shift(0, CFG_W, v, out);
      check("cfg written", cfg, c);
      shift(0, CFG_W, 128'h0, out);
      check("cfg read back", out[CFG_W-1:0], c);
    end
    // CHALLENGE write and read-back.
    shift(1, 4, 128'h3, out);
    for (int t = 0; t < 5; t++) begin
      v = 128'({$urandom, $urandom});
      shift(0, 64, v, out);
      check("chal written", chal, v[63:0]);
    end
    shift(0, 64, 128'h0, out);
    check("chal read back", out[63:0], v[63:0]);
    // START toggles.
    shift(1, 4, 128'h4, out);
    for (int t = 0; t < 4; t++) begin
      tg = start_tgl;
      shift(0, 1, 128'h0, out);
      check("start toggles", start_tgl != tg, 1);
    end
    // RESULT capture.
    shift(1, 4, 128'h5, out);
    for (int t = 0; t < 5; t++) begin
      st_l1_resp  = {$urandom, $urandom};
      st_response = 1'($urandom);
      st_done     = 1'($urandom);
      st_busy     = 1'($urandom);
      shift(0, 67, 128'h0, out);
      check("result", out[66:0], {st_l1_resp, st_response, st_done, st_busy});
    end
    // Asynchronous reset.
    #3 trst_n = 0;
    #3;
    check("trst cfg", cfg, CFG_RESET);
    check("trst chal", chal, 64'h0);
    // After reset the instruction is BYPASS again.
    #3 trst_n = 1;
    idle();
    shift(0, 8, 128'h3C, out);
    check("bypass after trst", out[7:0], 8'h78);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
