// epoch_top: two-slot multi-tenant system with EPOCH preemption support.
//
// The two partial-reconfiguration slots of the paper's basic benchmark share one
// tenant clock CLK1. Slot-1 holds the 4-bit up-counter, Slot-2 the 4-bit
// down-counter; both step on the common 'update' input. The LFSR tenants of the
// paper's second basic experiment sit beside them: the 8-bit LFSR in Slot-1 and
// the 32-bit LFSR in Slot-2 (the paper ran them as a separate experiment).
//
// The EPOCH controller runs on the free clock (CLK0 = clk) and freezes the slots by
// stopping CLK1 through clk_ctrl and clk_gate, so both clocks come from one source
// and no clock-domain crossing is involved. It saves a slot by reading its frames
// back over the configuration port into DRAM and restores it by writing them back
// and pulsing GSR.
//
// Outside this module (brought out as ports): the configuration port with the FPGA
// configuration memory behind it (pcap_*), the DRAM (dram_*), and the INIT values
// that configuration memory holds for the tenants' flip-flops (*_init), which the
// flip-flops load when gsr (EPOCH's pulse) or startup_gsr (the configuration
// logic's own, at the end of configuration) is high. The tenants' values come out on *_q, which
// is what the status-monitoring GPIO of the paper reads.
// FRAME_GAP and PAUSE_HANDSHAKE pass straight to epoch_ctrl; both are off by
// default, as in the paper's basic experiments. With PAUSE_HANDSHAKE = 1 the
// tenants must answer pause_req with pause_ack at a safe point before CLK1 is
// stopped; the demonstration tenants need no such point, so the port is left for
// tenants that do.
// Timing: see epoch_ctrl; a save or restore leaves CLK1 stopped from the clock
// register write at its start to the one at its end.
module epoch_top
  import epoch_pkg::*;
#(
  parameter int unsigned FAR_DEPTH = 64,
  parameter int unsigned FRAME_GAP = 0,
  parameter bit          PAUSE_HANDSHAKE = 1'b0,
  localparam int unsigned NS = 2,
  localparam int unsigned FW = $clog2(FAR_DEPTH),
  localparam int unsigned CW = $clog2(FAR_DEPTH + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // EPOCH commands and configuration
  input  logic                   cmd_save,
  input  logic                   cmd_restore,
  input  logic [NS-1:0]          cmd_slots,
  output logic                   busy,
  output logic                   done,
  input  logic                   far_we,
  input  logic [FW-1:0]          far_waddr,
  input  logic [31:0]            far_wdata,
  input  logic [NS-1:0][FW-1:0]  slot_first,
  input  logic [NS-1:0][CW-1:0]  slot_count,
  // configuration port
  output logic                   pcap_tx_valid,
  output logic [31:0]            pcap_tx_data,
  input  logic                   pcap_tx_ready,
  input  logic                   pcap_rx_valid,
  input  logic [31:0]            pcap_rx_data,
  output logic                   pcap_rx_ready,
  // DRAM
  output logic                   dram_req,
  output logic                   dram_we,
  output logic [31:0]            dram_addr,
  output logic [31:0]            dram_wdata,
  input  logic                   dram_gnt,
  input  logic                   dram_rvalid,
  input  logic [31:0]            dram_rdata,
  // global set/reset and the INIT values held in configuration memory
  output logic                   gsr,
  input  logic                   startup_gsr,
  input  logic [3:0]             up_init,
  input  logic [3:0]             down_init,
  input  logic [7:0]             lfsr8_init,
  input  logic [31:0]            lfsr32_init,
  // tenants
  input  logic                   update,
  output logic [3:0]             up_q,
  output logic [3:0]             down_q,
  output logic [7:0]             lfsr8_q,
  output logic [31:0]            lfsr32_q,
  // status
  output logic                   clk1_running,
  output logic                   cc_locked,
  output logic [7:0]             cc_blocked,
  output logic [15:0]            frames_saved,
  output logic [15:0]            frames_restored,
  output logic [15:0]            bram_fixes,
  output logic                   pad_err,
  output logic                   data_err,
  // optional safe-point handshake with the tenants (see epoch_ctrl)
  output logic                   pause_req,
  input  logic                   pause_ack
);

  logic        cc_we;
  logic [1:0]  cc_addr;
  logic [31:0] cc_wdata;
  logic        clk1;
  logic        tenant_gsr;

  // The fabric flip-flops see one global set/reset: the configuration logic's own
  // (end of configuration) or EPOCH's pulse after a restore.
  assign tenant_gsr = gsr | startup_gsr;

  epoch_ctrl #(
    .NUM_SLOTS(NS), .FAR_DEPTH(FAR_DEPTH), .FRAME_GAP(FRAME_GAP), .PAUSE_HANDSHAKE(PAUSE_HANDSHAKE)
  ) u_epoch (
    .clk, .rst_n, .cmd_save, .cmd_restore, .cmd_slots, .busy, .done,
    .far_we, .far_waddr, .far_wdata, .slot_first, .slot_count,
    .cc_we, .cc_addr, .cc_wdata,
    .pcap_tx_valid, .pcap_tx_data, .pcap_tx_ready, .pcap_rx_valid, .pcap_rx_data, .pcap_rx_ready,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .gsr, .frames_saved, .frames_restored, .bram_fixes, .pad_err, .data_err, .pause_req, .pause_ack
  );

  clk_ctrl u_cc (
    .clk, .rst_n, .we(cc_we), .addr(cc_addr), .wdata(cc_wdata),
    .clk_en(clk1_running), .locked(cc_locked), .blocked_cnt(cc_blocked)
  );

  clk_gate u_cg (.clk_i(clk), .en_i(clk1_running), .clk_o(clk1));

  // Slot-1
  tenant_counter #(.UP(1'b1), .W(4)) u_slot1_cnt (
    .clk(clk1), .gsr(tenant_gsr), .init(up_init), .update, .q(up_q)
  );
  tenant_lfsr #(.W(8)) u_slot1_lfsr (.clk(clk1), .gsr(tenant_gsr), .init(lfsr8_init), .q(lfsr8_q));

  // Slot-2
  tenant_counter #(.UP(1'b0), .W(4)) u_slot2_cnt (
    .clk(clk1), .gsr(tenant_gsr), .init(down_init), .update, .q(down_q)
  );
  tenant_lfsr #(.W(32)) u_slot2_lfsr (.clk(clk1), .gsr(tenant_gsr), .init(lfsr32_init), .q(lfsr32_q));

endmodule
