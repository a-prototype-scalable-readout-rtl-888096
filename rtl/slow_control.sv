// slow_control: register file reached through the register-access bus (RBCP)
// of the SiTCP TCP processor.
//
// The host PC controls the Front-End Card over the same Gigabit Ethernet link
// that carries the data. SiTCP turns a UDP register access into a bus cycle:
// RBCP_ADDR and RBCP_WD with a one-cycle RBCP_WE pulse for a write, RBCP_ADDR
// with an RBCP_RE pulse for a read; the user logic answers every access with
// a one-cycle RBCP_ACK, carrying RBCP_RD for a read. Here the ACK follows one
// cycle after the request. Registers live at addresses 0x00..0x08 (see
// fec_pkg::reg_addr_e); other addresses are acknowledged, read as zero and
// ignore writes.
//
//   0x00 CTRL     r/w  [0] run enable, [1] external trigger enable
//   0x01 CMD      w    write 1 to [0]: software trigger, to [1]: clear counters
//                      (one-cycle pulses; reads as zero)
//   0x02 TEST_ON  r/w  VA140 TEST_ON level, one bit per ASIC card
//   0x03 STATUS   r    [0] busy, [1] no room for an event, [2] buffer empty, [3] overflow
//   0x04..0x07    r    accepted / rejected trigger counters, low byte first
//   0x08 ID       r    design identifier
//
// The existence of control commands over the Ethernet link follows the
// readout system description; the register map is this design's own.
module slow_control
  import fec_pkg::*;
#(
  parameter int unsigned N_CARDS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // SiTCP register access bus
  input  logic [31:0]        rbcp_addr,
  input  logic               rbcp_we,
  input  logic [7:0]         rbcp_wd,
  input  logic               rbcp_re,
  output logic               rbcp_ack,
  output logic [7:0]         rbcp_rd,
  // control outputs
  output logic               run_en,
  output logic               ext_trig_en,
  output logic               sw_trig,
  output logic               clear_counters,
  output logic [N_CARDS-1:0] test_on_mask,
  // status inputs
  input  logic [3:0]         status,
  input  logic [15:0]        acc_count,
  input  logic [15:0]        rej_count
);

  logic       in_range;
  logic [7:0] rd_mux;

  always_comb begin
    in_range = (rbcp_addr[31:8] == '0);
    rd_mux   = '0;
    if (in_range) begin
      unique case (rbcp_addr[7:0])
        REG_CTRL:    rd_mux = {6'b0, ext_trig_en, run_en};
        REG_TEST_ON: rd_mux = 8'(test_on_mask);
        REG_STATUS:  rd_mux = {4'b0, status};
        REG_ACC_LO:  rd_mux = acc_count[7:0];
        REG_ACC_HI:  rd_mux = acc_count[15:8];
        REG_REJ_LO:  rd_mux = rej_count[7:0];
        REG_REJ_HI:  rd_mux = rej_count[15:8];
        REG_ID:      rd_mux = DESIGN_ID;
        default:     rd_mux = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbcp_ack       <= 1'b0;
      rbcp_rd        <= '0;
      run_en         <= 1'b0;
      ext_trig_en    <= 1'b0;
      sw_trig        <= 1'b0;
      clear_counters <= 1'b0;
      test_on_mask   <= '0;
    end else begin
      rbcp_ack       <= rbcp_we | rbcp_re;
      sw_trig        <= 1'b0;
      clear_counters <= 1'b0;
      if (rbcp_re) rbcp_rd <= rd_mux;
      if (rbcp_we && in_range) begin
        unique case (rbcp_addr[7:0])
          REG_CTRL: begin
            run_en      <= rbcp_wd[0];
            ext_trig_en <= rbcp_wd[1];
          end
          REG_CMD: begin
            sw_trig        <= rbcp_wd[0];
            clear_counters <= rbcp_wd[1];
          end
          REG_TEST_ON: test_on_mask <= rbcp_wd[N_CARDS-1:0];
          default: ;
        endcase
      end
    end
  end

  a_one_access: assert property (@(posedge clk) disable iff (!rst_n) !(rbcp_we && rbcp_re))
    else $error("slow_control: read and write in the same cycle");

endmodule
