// ahb_master_port: issues one AHB-Lite single transfer per command.
//
// Helper of data processing. A command (`cmd_valid`, address, write flag,
// size, write data) is taken when `cmd_ready` is high, i.e. when no
// transfer is in progress. The address phase (HTRANS = NONSEQ) is held
// until HREADY; the data phase follows, with HWDATA driven for a write,
// and lasts until HREADY again. `done` then pulses for one cycle with
// HRDATA on `rdata` for a read. Transfers are not pipelined: each photon
// needs a handful of them, far below the bus capacity.
module ahb_master_port
  import els_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [31:0] cmd_addr,
  input  logic        cmd_write,
  input  logic [2:0]  cmd_size,
  input  logic [31:0] cmd_wdata,
  output logic        done,
  output logic        err,
  output logic [31:0] rdata,
  output ahb_m2s_t    ahb_o,
  input  ahb_s2m_t    ahb_i
);
  typedef enum logic [1:0] {M_IDLE, M_ADDR, M_DATA} mstate_e;
  mstate_e     st;
  logic [31:0] addr_q, wdata_q;
  logic        write_q;
  logic [2:0]  size_q;

  assign cmd_ready = (st == M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; addr_q <= '0; wdata_q <= '0; write_q <= 1'b0; size_q <= '0;
      done <= 1'b0; err <= 1'b0; rdata <= '0;
    end else begin
      done <= 1'b0;
      err  <= 1'b0;
      unique case (st)
        M_IDLE: if (cmd_valid) begin
          addr_q <= cmd_addr; write_q <= cmd_write; size_q <= cmd_size; wdata_q <= cmd_wdata;
          st <= M_ADDR;
        end
        M_ADDR: if (ahb_i.hready) st <= M_DATA;
        M_DATA: if (ahb_i.hready) begin
          st    <= M_IDLE;
          done  <= 1'b1;
          err   <= ahb_i.hresp;
          rdata <= ahb_i.hrdata;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  assign ahb_o.htrans = (st == M_ADDR) ? HT_NONSEQ : HT_IDLE;
  assign ahb_o.haddr  = addr_q;
  assign ahb_o.hwrite = write_q;
  assign ahb_o.hsize  = size_q;
  assign ahb_o.hwdata = (st == M_DATA) ? wdata_q : '0;
endmodule
