// jtag_host: bit-level JTAG master for the POP testbenches.
//
// Drives TMS and TDI on the falling TCK edge and samples up to NT TDO lines
// on the rising edge. Tasks: tap_reset (five TMS-high cycles), ir (load an
// instruction), dr (shift a data register of len bits, LSB first, returning
// what each TDO line shifted out). Every task ends in Run-Test/Idle.
module jtag_host #(
  parameter int NT = 1,
  parameter int HALF = 10
) (
  output logic          tck,
  output logic          tms,
  output logic          tdi,
  input  logic [NT-1:0] tdo
);

  initial begin
    tck = 0;
    tms = 1;
    tdi = 0;
    forever #HALF tck = ~tck;
  end

  task automatic clk1(logic m, logic d, output logic [NT-1:0] o);
    @(negedge tck);
    tms = m;
    tdi = d;
    @(posedge tck);
    o = tdo;
  endtask

  task automatic tap_reset();
    logic [NT-1:0] o;
    for (int i = 0; i < 5; i++) clk1(1, 0, o);
    clk1(0, 0, o);
  endtask

  task automatic shift(bit is_ir, int len, logic [127:0] din, output logic [127:0] dout [NT]);
    logic [NT-1:0] o;
    foreach (dout[t]) dout[t] = '0;
    clk1(1, 0, o);
    if (is_ir) clk1(1, 0, o);
    clk1(0, 0, o);
    clk1(0, 0, o);
    for (int i = 0; i < len; i++) begin
      clk1(i == len - 1, din[i], o);
      for (int t = 0; t < NT; t++) dout[t][i] = o[t];
    end
    clk1(1, 0, o);
    clk1(0, 0, o);
    #1;
  endtask

  task automatic ir(logic [3:0] code);
    logic [127:0] d [NT];
    shift(1, 4, 128'(code), d);
  endtask

  task automatic dr(int len, logic [127:0] din, output logic [127:0] dout [NT]);
    shift(0, len, din, dout);
  endtask

endmodule
