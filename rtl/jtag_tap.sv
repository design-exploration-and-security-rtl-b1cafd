// jtag_tap: IEEE 1149.1 test access port of the POP core.
//
// The standard 16-state TAP controller (TMS sampled on the rising TCK edge,
// TDO driven on the falling edge, asynchronous reset on trst_n or five TCK
// cycles with TMS high), a 4-bit instruction register and four data
// registers. All registers shift least significant bit first: TDI enters at
// the top, TDO leaves from bit 0.
//
//   IR  name       DR length  function
//   0x2 CONFIG     CFG_W      Update-DR writes cfg (layer select, rounds,
//                             TMV count); Capture-DR reads it back
//   0x3 CHALLENGE  64         Update-DR writes the initial challenge
//   0x4 START      1          Update-DR toggles start_tgl (one evaluation)
//   0x5 RESULT     67         Capture-DR takes {l1_resp, response, done, busy}
//   0xF BYPASS     1          also selected after reset and by any other code
//
// The core runs on its own clock; start_tgl is a toggle to be synchronised
// there, and cfg and chal must only be written while the core is idle. The
// status inputs are expected to be synchronised to TCK already. The testchip
// has a JTAG interface, but its registers and codes are not published: the
// register map above is this design's own.
module jtag_tap
  import pop_pkg::*;
(
  input  logic              tck,
  input  logic              trst_n,
  input  logic              tms,
  input  logic              tdi,
  output logic              tdo,
  output pop_cfg_t          cfg,
  output logic [CHAL_W-1:0] chal,
  output logic              start_tgl,
  input  logic [CHAL_W-1:0] st_l1_resp,
  input  logic              st_response,
  input  logic              st_done,
  input  logic              st_busy
);

  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UPD_IR
  } tap_t;

  typedef enum logic [3:0] {
    I_CONFIG = 4'h2, I_CHAL = 4'h3, I_START = 4'h4, I_RESULT = 4'h5, I_BYPASS = 4'hF
  } instr_t;

  localparam int unsigned RES_W = CHAL_W + 3;
  localparam int unsigned SR_W  = RES_W;   // longest data register

  tap_t            st, st_d;
  logic [3:0]      ir_sh, ir;
  logic [SR_W-1:0] dr_sh, dr_shifted;
  logic            tdo_d;

  always_comb begin
    unique case (st)
      TLR:    st_d = tms ? TLR    : RTI;
      RTI:    st_d = tms ? SEL_DR : RTI;
      SEL_DR: st_d = tms ? SEL_IR : CAP_DR;
      CAP_DR: st_d = tms ? EX1_DR : SH_DR;
      SH_DR:  st_d = tms ? EX1_DR : SH_DR;
      EX1_DR: st_d = tms ? UPD_DR : PA_DR;
      PA_DR:  st_d = tms ? EX2_DR : PA_DR;
      EX2_DR: st_d = tms ? UPD_DR : SH_DR;
      UPD_DR: st_d = tms ? SEL_DR : RTI;
      SEL_IR: st_d = tms ? TLR    : CAP_IR;
      CAP_IR: st_d = tms ? EX1_IR : SH_IR;
      SH_IR:  st_d = tms ? EX1_IR : SH_IR;
      EX1_IR: st_d = tms ? UPD_IR : PA_IR;
      PA_IR:  st_d = tms ? EX2_IR : PA_IR;
      EX2_IR: st_d = tms ? UPD_IR : SH_IR;
      UPD_IR: st_d = tms ? SEL_DR : RTI;
      default: st_d = TLR;
    endcase
  end

  // Length of the data register selected by the current instruction.
  function automatic int unsigned dr_len(logic [3:0] i);
    unique case (i)
      I_CONFIG: return CFG_W;
      I_CHAL:   return CHAL_W;
      I_RESULT: return RES_W;
      default:  return 1;
    endcase
  endfunction

  always_ff @(posedge tck or negedge trst_n) begin
    if (!trst_n) begin
      st        <= TLR;
      ir        <= I_BYPASS;
      ir_sh     <= '0;
      dr_sh     <= '0;
      cfg       <= CFG_RESET;
      chal      <= '0;
      start_tgl <= 1'b0;
    end else begin
      st <= st_d;
      unique case (st)
        TLR:    ir <= I_BYPASS;
        CAP_IR: ir_sh <= 4'b0001;           // fixed 01 in the two low bits
        SH_IR:  ir_sh <= {tdi, ir_sh[3:1]};
        UPD_IR: ir <= ir_sh;
        CAP_DR: begin
          dr_sh <= '0;
          unique case (ir)
            I_CONFIG: dr_sh[CFG_W-1:0] <= cfg;
            I_CHAL:   dr_sh[CHAL_W-1:0] <= chal;
            I_RESULT: dr_sh <= {st_l1_resp, st_response, st_done, st_busy};
            default:  ;
          endcase
        end
        SH_DR:  dr_sh <= dr_shifted;
        UPD_DR: begin
          unique case (ir)
            I_CONFIG: cfg <= pop_cfg_t'(dr_sh[CFG_W-1:0]);
            I_CHAL:   chal <= dr_sh[CHAL_W-1:0];
            I_START:  start_tgl <= ~start_tgl;
            default:  ;
          endcase
        end
        default: ;
      endcase
    end
  end

  // Shift right; TDI enters at bit len-1 of the selected register.
  always_comb begin
    dr_shifted = dr_sh >> 1;
    dr_shifted[dr_len(ir)-1] = tdi;
  end

  always_comb tdo_d = (st == SH_IR) ? ir_sh[0] : dr_sh[0];

  always_ff @(negedge tck or negedge trst_n) begin
    if (!trst_n) tdo <= 1'b0;
    else         tdo <= tdo_d;
  end

endmodule
