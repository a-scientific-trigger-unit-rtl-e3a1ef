// ahb_slave_access: AHB slave through which the CPU reaches the FPGA.
//
// PCI target cycles of the CPU arrive, through the PCI/AHB bridge, as
// AHB-Lite single transfers of 32-bit words. Byte address bits [9:8] pick a
// region: 0 control/status registers, 1 pointer RAM, 2 photon counters
// (read only), 3 word counts (read only); bits [7:2] pick the word. A write
// completes with no wait state: the register-bus strobe is issued in the
// data phase, when HWDATA is valid. A read takes one wait state: in the
// first data-phase cycle the read is issued (pointer RAM read enable, or the
// combinational value of the other regions is captured), in the second
// HRDATA is driven and HREADYOUT rises. Writes to read-only regions are
// ignored; the response is always OKAY. The slave is the only one on the
// bridge's AHB side, so its own HREADYOUT is taken as HREADY.
//
// The paper says only that CPU accesses are decoded as AHB slave accesses;
// the address map and the wait states are this design's own.
module ahb_slave_access
  import els_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  ahb_m2s_t    ahb_i,
  output ahb_s2m_t    ahb_o,
  // register bus towards the blocks
  output logic        reg_we,
  output logic        rp_we,
  output logic        rp_re,
  output logic [5:0]  widx,
  output logic [31:0] wdata,
  input  logic [31:0] reg_rdata,
  input  logic [31:0] rp_rdata,
  input  logic [31:0] cnt_rdata,
  input  logic [31:0] wc_rdata
);
  typedef enum logic [1:0] {S_IDLE, S_WRITE, S_READ1, S_READ2} state_e;
  state_e      state;
  logic [1:0]  region;
  logic [5:0]  idx;
  logic [31:0] hold;
  logic        accept;

  assign accept = ahb_i.htrans[1] && ahb_o.hready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; region <= '0; idx <= '0; hold <= '0;
    end else begin
      unique case (state)
        S_READ1: begin
          state <= S_READ2;
          unique case (region)
            REGION_REGS: hold <= reg_rdata;
            REGION_CNT:  hold <= cnt_rdata;
            REGION_WC:   hold <= wc_rdata;
            default:     hold <= '0;
          endcase
        end
        default: begin
          if (accept) begin
            region <= ahb_i.haddr[9:8];
            idx    <= ahb_i.haddr[7:2];
            state  <= ahb_i.hwrite ? S_WRITE : S_READ1;
          end else begin
            state <= S_IDLE;
          end
        end
      endcase
    end
  end

  assign widx   = idx;
  assign wdata  = ahb_i.hwdata;
  assign reg_we = (state == S_WRITE) && (region == REGION_REGS);
  assign rp_we  = (state == S_WRITE) && (region == REGION_RPTR);
  assign rp_re  = (state == S_READ1) && (region == REGION_RPTR);

  assign ahb_o.hready = (state != S_READ1);
  assign ahb_o.hresp  = 1'b0;
  assign ahb_o.hrdata = (state != S_READ2) ? '0 :
                        (region == REGION_RPTR) ? rp_rdata : hold;
endmodule
