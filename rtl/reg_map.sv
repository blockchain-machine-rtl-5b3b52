// reg_map: the host's view of the Blockchain Machine, an AXI4-Lite register
// file that holds the validation result of one block.
//
// When the registers are empty, reg_map takes the next result from res_fifo
// and sets STATUS.ready. It takes no further result until the host writes 1
// to RELEASE, so a result cannot be overwritten before software has read it.
// Register map (32-bit words, byte addresses; unused addresses read 0):
//   0x00 STATUS      bit0 = a result is held
//   0x04 RELEASE     write 1: done with this result
//   0x08 BLOCK_NUM   0x0C BLOCK_VALID (bit0)   0x10 NUM_TXS
//   0x14 VERIFY_CYCLES  0x18 VALIDATE_CYCLES  0x1C TOTAL_CYCLES  0x20 VALID_TXS
//   0x40 + 4*i       TX_FLAGS[32*i+31 : 32*i], bit = transaction valid
// AXI4-Lite: a write is taken when AWVALID and WVALID are both high and no
// response is pending; a read is answered one cycle after ARVALID. Responses
// are always OKAY. The register contents come from the design; the address
// map and the release-by-write rule are this implementation's choice.
//
// Only word addresses, write data bit 0 and strobe bit 0 are decoded, so
// lint lists the other address/data/strobe bits as unused. Lint notes: rst_n
// is both the asynchronous reset of the flip-flops and the disable condition
// of the assertions, which lint reports as a net used both ways; that is
// intended.
module reg_map
  import bmac_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        res_valid,
  output logic        res_ready,
  input  res_fifo_t   res,
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready
);
  localparam int NFLAGW = MAX_TXS / 32;

  logic      full;
  res_fifo_t r;

  assign res_ready = !full;

  wire wr_go = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  wire rd_go = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_awready = wr_go;
  assign s_axi_wready  = wr_go;
  assign s_axi_arready = rd_go;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  function automatic logic [31:0] read_reg(input logic [7:0] a);
    logic [31:0] d;
    d = '0;
    case (a[7:2])
      6'h00: d = {31'b0, full};
      6'h02: d = r.block_num;
      6'h03: d = {31'b0, r.block_valid};
      6'h04: d = 32'(r.num_txs);
      6'h05: d = r.stats.verify_cycles;
      6'h06: d = r.stats.validate_cycles;
      6'h07: d = r.stats.total_cycles;
      6'h08: d = r.stats.valid_txs;
      default:
        for (int i = 0; i < NFLAGW; i++)
          if (a[7:2] == 6'(16 + i)) d = r.tx_flags[32*i +: 32];
    endcase
    return d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full         <= 1'b0;
      r            <= '0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (res_valid && res_ready) begin
        r    <= res;
        full <= 1'b1;
      end
      if (wr_go) begin
        s_axi_bvalid <= 1'b1;
        if (s_axi_awaddr[7:2] == 6'h01 && s_axi_wstrb[0] && s_axi_wdata[0]) full <= 1'b0;
      end else if (s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
      if (rd_go) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= read_reg(s_axi_araddr);
      end else if (s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI: a response stays valid until it is taken.
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid);
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
endmodule
