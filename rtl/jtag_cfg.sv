// jtag_cfg: JTAG (IEEE 1149.1) slow-control port of the chip.
//
// A standard 16-state TAP controller with a 4-bit instruction register and
// three data registers: BYPASS (1 bit, instruction 4'b1111), IDCODE
// (32 bits, instruction 4'b0001, selected after reset) and CONFIG
// (instruction 4'b1000), a CFG_W-bit shift register whose content is
// copied into the configuration register cfg on Update-DR. Bits shift in
// at tdi, least significant first, and tdo is updated on the falling edge
// of tck as the standard requires. cfg and the toggle cfg_upd, which flips
// at every update, live in the tck domain; the chip core resynchronises
// them. Capture-DR of CONFIG loads the current configuration, so it can be
// read back. The paper only says that a standard JTAG interface is used
// for slow control; the instructions, IDCODE value and register contents
// are this design's choices.
module jtag_cfg
  import petat_pkg::*;
#(
  parameter logic [31:0] IDCODE = 32'h1000_50A1
) (
  input  logic tck,
  input  logic trst_n,
  input  logic tms,
  input  logic tdi,
  output logic tdo,
  output cfg_t cfg,
  output logic cfg_upd
);

  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UPD_IR
  } tap_t;

  localparam logic [3:0] I_IDCODE = 4'b0001;
  localparam logic [3:0] I_CONFIG = 4'b1000;
  localparam logic [3:0] I_BYPASS = 4'b1111;

  tap_t             st, nx;
  logic [3:0]       ir, ir_sh;
  logic [31:0]      id_sh;
  logic [CFG_W-1:0] cfg_sh;
  logic             byp_sh;

  always_comb begin
    unique case (st)
      TLR:    nx = tms ? TLR    : RTI;
      RTI:    nx = tms ? SEL_DR : RTI;
      SEL_DR: nx = tms ? SEL_IR : CAP_DR;
      CAP_DR: nx = tms ? EX1_DR : SH_DR;
      SH_DR:  nx = tms ? EX1_DR : SH_DR;
      EX1_DR: nx = tms ? UPD_DR : PA_DR;
      PA_DR:  nx = tms ? EX2_DR : PA_DR;
      EX2_DR: nx = tms ? UPD_DR : SH_DR;
      UPD_DR: nx = tms ? SEL_DR : RTI;
      SEL_IR: nx = tms ? TLR    : CAP_IR;
      CAP_IR: nx = tms ? EX1_IR : SH_IR;
      SH_IR:  nx = tms ? EX1_IR : SH_IR;
      EX1_IR: nx = tms ? UPD_IR : PA_IR;
      PA_IR:  nx = tms ? EX2_IR : PA_IR;
      EX2_IR: nx = tms ? UPD_IR : SH_IR;
      default: nx = tms ? SEL_DR : RTI;  // UPD_IR
    endcase
  end

  always_ff @(posedge tck or negedge trst_n) begin
    if (!trst_n) begin
      st      <= TLR;
      ir      <= I_IDCODE;
      ir_sh   <= '0;
      id_sh   <= '0;
      cfg_sh  <= '0;
      byp_sh  <= 1'b0;
      cfg     <= CFG_RESET;
      cfg_upd <= 1'b0;
    end else begin
      st <= nx;
      unique case (st)
        TLR:    ir <= I_IDCODE;
        CAP_IR: ir_sh <= 4'b0001;
        SH_IR:  ir_sh <= {tdi, ir_sh[3:1]};
        UPD_IR: ir <= ir_sh;
        CAP_DR: begin
          id_sh  <= IDCODE;
          cfg_sh <= cfg;
          byp_sh <= 1'b0;
        end
        SH_DR: begin
          if (ir == I_IDCODE)      id_sh  <= {tdi, id_sh[31:1]};
          else if (ir == I_CONFIG) cfg_sh <= {tdi, cfg_sh[CFG_W-1:1]};
          else                     byp_sh <= tdi;
        end
        UPD_DR: if (ir == I_CONFIG) begin
          cfg     <= cfg_t'(cfg_sh);
          cfg_upd <= ~cfg_upd;
        end
        default: ;
      endcase
    end
  end

  // Test data output changes on the falling edge of tck.
  always_ff @(negedge tck or negedge trst_n) begin
    if (!trst_n)         tdo <= 1'b0;
    else if (st == SH_IR) tdo <= ir_sh[0];
    else if (st == SH_DR) begin
      if (ir == I_IDCODE)      tdo <= id_sh[0];
      else if (ir == I_CONFIG) tdo <= cfg_sh[0];
      else                     tdo <= byp_sh;
    end
  end

endmodule
