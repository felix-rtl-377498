// wupper_regs: host-visible registers of one firmware set ("configuration
// registers: control and monitor").
//
// Registers are 64 bits wide and addressed by word. A write (reg_wr) takes
// effect at the clock edge; a read (reg_rd) returns reg_rdata with
// reg_rvalid one cycle later.
//   0x00-0x1F  descriptor d = addr[4:2], field addr[1:0]:
//              0 start address, 1 end address,
//              2 control {wrap[9], from_host[8], words per request[7:0]},
//              3 write: host pointer, read: current address
//   0x20       write 1s: enable descriptors; read: enabled mask
//   0x21       read: done mask
//   0x22       interrupt mask
//   0x30       chunk size in bytes (reset 40)
//   0x31       per-link E-link enable (reset all 1)
//   0x32       per-link TTC select (reset 0)
//   0x33       per-link GBT wide-bus mode (reset 0)
//   0x40-0x4F  read: monitor inputs mon[0..15]
// Unmapped addresses read as zero.
// Follows the paper: a block of control and monitor registers. The map is
// this design's own.
module wupper_regs #(
  parameter int unsigned NUM_DESC = 8,
  parameter int unsigned LINKS    = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        reg_wr,
  input  logic                        reg_rd,
  input  logic [7:0]                  reg_addr,
  input  logic [63:0]                 reg_wdata,
  output logic [63:0]                 reg_rdata,
  output logic                        reg_rvalid,
  // to DMA control
  output logic                        desc_wr,
  output logic [$clog2(NUM_DESC)-1:0] desc_idx,
  output logic [1:0]                  desc_field,
  output logic [63:0]                 desc_wdata,
  output logic [NUM_DESC-1:0]         enable_set,
  input  logic [NUM_DESC-1:0]         enabled,
  input  logic [NUM_DESC-1:0]         done,
  input  logic [63:0]                 cur_addr [NUM_DESC],
  output logic [NUM_DESC-1:0]         irq_mask,
  // application configuration
  output logic [15:0]                 chunk_size,
  output logic [LINKS-1:0]            elink_en,
  output logic [LINKS-1:0]            ttc_sel,
  output logic [LINKS-1:0]            widebus,
  input  logic [63:0]                 mon [16]
);

  localparam int unsigned DW = $clog2(NUM_DESC);

  assign desc_wr    = reg_wr && (reg_addr < 8'(4 * NUM_DESC));
  assign desc_idx   = reg_addr[DW+1:2];
  assign desc_field = reg_addr[1:0];
  assign desc_wdata = reg_wdata;
  assign enable_set = (reg_wr && reg_addr == 8'h20) ? reg_wdata[NUM_DESC-1:0] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_mask   <= '1;
      chunk_size <= 16'd40;
      elink_en   <= '1;
      ttc_sel    <= '0;
      widebus    <= '0;
      reg_rdata  <= '0;
      reg_rvalid <= 1'b0;
    end else begin
      if (reg_wr) begin
        unique case (reg_addr)
          8'h22: irq_mask   <= reg_wdata[NUM_DESC-1:0];
          8'h30: chunk_size <= reg_wdata[15:0];
          8'h31: elink_en   <= reg_wdata[LINKS-1:0];
          8'h32: ttc_sel    <= reg_wdata[LINKS-1:0];
          8'h33: widebus    <= reg_wdata[LINKS-1:0];
          default: ;
        endcase
      end
      reg_rvalid <= reg_rd;
      if (reg_rd) begin
        reg_rdata <= '0;
        if (reg_addr < 8'(4 * NUM_DESC)) begin
          if (reg_addr[1:0] == 2'd3) reg_rdata <= cur_addr[reg_addr[DW+1:2]];
        end else begin
          unique case (reg_addr)
            8'h20: reg_rdata <= 64'(enabled);
            8'h21: reg_rdata <= 64'(done);
            8'h22: reg_rdata <= 64'(irq_mask);
            8'h30: reg_rdata <= 64'(chunk_size);
            8'h31: reg_rdata <= 64'(elink_en);
            8'h32: reg_rdata <= 64'(ttc_sel);
            8'h33: reg_rdata <= 64'(widebus);
            default: if (reg_addr[7:4] == 4'h4) reg_rdata <= mon[reg_addr[3:0]];
          endcase
        end
      end
    end
  end

  initial assert (LINKS <= 64 && NUM_DESC <= 8) else $error("register map holds 64 links, 8 descriptors");

endmodule
