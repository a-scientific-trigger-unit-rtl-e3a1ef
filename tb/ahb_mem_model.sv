// ahb_mem_model: behavioural model of the CPU board SDRAM as seen from the
// FPGA's AHB master port (through the PCI/AHB bridge). Not synthesizable.
//
// A sparse word memory (associative array, unwritten words read as 0)
// answering AHB-Lite single transfers. Each data phase is stretched by a
// random number of wait states between 0 and MAX_WAIT, standing in for the
// PCI and memory-controller latency. Halfword writes use the lane picked by
// address bit 1 (bit 1 = 0: bits [15:0]). The testbench reads and writes
// the array directly through peek/poke.
module ahb_mem_model
  import els_pkg::*;
#(
  parameter int unsigned MAX_WAIT = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  ahb_m2s_t ahb_i,
  output ahb_s2m_t ahb_o
);
  logic [31:0] mem [int unsigned];
  logic        dphase, dwrite;
  logic [31:0] daddr;
  logic [2:0]  dsize;
  int unsigned wait_left;
  int unsigned n_write, n_read, n_wait;

  function automatic logic [31:0] peek(input logic [31:0] addr);
    int unsigned a = int'(addr >> 2);
    return mem.exists(a) ? mem[a] : 32'd0;
  endfunction

  function automatic void poke(input logic [31:0] addr, input logic [31:0] val);
    mem[int'(addr >> 2)] = val;
  endfunction

  assign ahb_o.hready = !dphase || (wait_left == 0);
  assign ahb_o.hresp  = 1'b0;
  assign ahb_o.hrdata = (dphase && !dwrite && wait_left == 0) ? peek(daddr) : 32'd0;

  initial begin n_write = 0; n_read = 0; n_wait = 0; end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dphase <= 1'b0; wait_left <= 0; dwrite <= 1'b0; daddr <= '0; dsize <= '0;
    end else begin
      if (dphase && wait_left != 0) begin
        wait_left <= wait_left - 1;
        n_wait++;
      end else begin
        if (dphase && dwrite) begin
          logic [31:0] w;
          w = peek(daddr);
          if (dsize == HSIZE_HALF) begin
            if (daddr[1]) w[31:16] = ahb_i.hwdata[31:16];
            else          w[15:0]  = ahb_i.hwdata[15:0];
          end else begin
            w = ahb_i.hwdata;
          end
          poke(daddr, w);
          n_write++;
        end else if (dphase) begin
          n_read++;
        end
        if (ahb_i.htrans[1]) begin
          dphase    <= 1'b1;
          dwrite    <= ahb_i.hwrite;
          daddr     <= ahb_i.haddr;
          dsize     <= ahb_i.hsize;
          wait_left <= (MAX_WAIT == 0) ? 0 : $urandom_range(MAX_WAIT, 0);
        end else begin
          dphase <= 1'b0;
        end
      end
    end
  end
endmodule
