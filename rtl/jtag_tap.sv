// jtag_tap: IEEE 1149.1 test access port through which the tester loads
// and reads the test RAMs and the control register at low speed.
//
// The TAP state machine, the 4-bit instruction register and the
// IDCODE/BYPASS registers follow IEEE 1149.1. Design-specific is the
// ACCESS data register (instruction 4'b1000), 76 bits shifted LSB first:
//   [63:0] data, [71:64] address, [74:72] address space, [75] write.
// On Update-DR it raises acc_valid for one clk cycle with those fields.
// On Capture-DR it loads acc_rdata (the word of the last read) into the
// data bits, so a read takes two scans: one to request, one to unload.
// This TAP is clocked by the fast core clock: TCK, TMS and TDI are
// synchronised through two flip-flops and TCK edges are detected, so TCK
// must be slower than a quarter of clk. TDO changes after falling TCK
// edges. Running it in the core clock domain is this design's choice; the
// chip's JTAG controller is only named.
module jtag_tap
  import fpmax_pkg::*;
#(
  parameter logic [31:0] IDCODE = 32'h0FA0_0001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tck,
  input  logic        tms,
  input  logic        tdi,
  output logic        tdo,
  output logic        acc_valid,
  output acc_req_t    acc_req,
  input  logic [63:0] acc_rdata
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UPD_IR
  } tap_e;

  localparam logic [3:0] IR_IDCODE = 4'b0001;
  localparam logic [3:0] IR_ACCESS = 4'b1000;
  localparam logic [3:0] IR_BYPASS = 4'b1111;

  logic [2:0]       tck_s, tms_s, tdi_s;
  logic             rise, fall;
  tap_e             st, st_n;
  logic [3:0]       ir, ir_sr;
  logic [31:0]      id_sr;
  logic             byp_sr;
  logic [ACC_W-1:0] acc_sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tck_s <= '0; tms_s <= '1; tdi_s <= '0;
    end else begin
      tck_s <= {tck_s[1:0], tck};
      tms_s <= {tms_s[1:0], tms};
      tdi_s <= {tdi_s[1:0], tdi};
    end
  end
  assign rise = (tck_s[2:1] == 2'b01);
  assign fall = (tck_s[2:1] == 2'b10);

  always_comb begin
    unique case (st)
      TLR:    st_n = tms_s[1] ? TLR    : RTI;
      RTI:    st_n = tms_s[1] ? SEL_DR : RTI;
      SEL_DR: st_n = tms_s[1] ? SEL_IR : CAP_DR;
      CAP_DR: st_n = tms_s[1] ? EX1_DR : SH_DR;
      SH_DR:  st_n = tms_s[1] ? EX1_DR : SH_DR;
      EX1_DR: st_n = tms_s[1] ? UPD_DR : PA_DR;
      PA_DR:  st_n = tms_s[1] ? EX2_DR : PA_DR;
      EX2_DR: st_n = tms_s[1] ? UPD_DR : SH_DR;
      UPD_DR: st_n = tms_s[1] ? SEL_DR : RTI;
      SEL_IR: st_n = tms_s[1] ? TLR    : CAP_IR;
      CAP_IR: st_n = tms_s[1] ? EX1_IR : SH_IR;
      SH_IR:  st_n = tms_s[1] ? EX1_IR : SH_IR;
      EX1_IR: st_n = tms_s[1] ? UPD_IR : PA_IR;
      PA_IR:  st_n = tms_s[1] ? EX2_IR : PA_IR;
      EX2_IR: st_n = tms_s[1] ? UPD_IR : SH_IR;
      UPD_IR: st_n = tms_s[1] ? SEL_DR : RTI;
      default: st_n = TLR;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= TLR;
      ir        <= IR_IDCODE;
      ir_sr     <= '0;
      id_sr     <= '0;
      byp_sr    <= 1'b0;
      acc_sr    <= '0;
      acc_valid <= 1'b0;
      acc_req   <= '0;
      tdo       <= 1'b0;
    end else begin
      acc_valid <= 1'b0;
      if (rise) begin
        st <= st_n;
        unique case (st)
          TLR:    ir <= IR_IDCODE;
          CAP_IR: ir_sr <= 4'b0001;
          SH_IR:  ir_sr <= {tdi_s[1], ir_sr[3:1]};
          UPD_IR: ir <= ir_sr;
          CAP_DR: begin
            id_sr  <= IDCODE;
            byp_sr <= 1'b0;
            acc_sr <= {acc_sr[ACC_W-1:64], acc_rdata};
          end
          SH_DR: begin
            if (ir == IR_IDCODE)      id_sr  <= {tdi_s[1], id_sr[31:1]};
            else if (ir == IR_ACCESS) acc_sr <= {tdi_s[1], acc_sr[ACC_W-1:1]};
            else                      byp_sr <= tdi_s[1];
          end
          UPD_DR: if (ir == IR_ACCESS) begin
            acc_valid <= 1'b1;
            acc_req   <= acc_req_t'(acc_sr);
          end
          default: ;
        endcase
      end
      if (fall) begin
        if (st == SH_IR)      tdo <= ir_sr[0];
        else if (st == SH_DR) tdo <= (ir == IR_IDCODE) ? id_sr[0] :
                                     (ir == IR_ACCESS) ? acc_sr[0] : byp_sr;
        else                  tdo <= 1'b0;
      end
    end
  end
endmodule
