// ctrl_regs: AXI4-Lite register file through which the host configures the
// sampling stage without re-synthesis.
//
// Register map (32-bit registers, byte addresses):
//   0x00 MODE      bit 0: 1 = PPR (walks stop with probability alpha per hop),
//                  0 = uniform random walk of fixed length
//   0x04 ALPHA     stop probability as a 32-bit fraction (p * 2^32)
//   0x08 MAX_LEN   walk length in hops, bits [7:0] (reset value 80)
//   0x0C COMPLETED walks finished since reset (read only)
// The map and reset values are this design's; the write of one register is
// one 32-bit AXI4-Lite write. A write needs AW and W together and answers with
// an OKAY response one cycle later; a read answers one cycle after AR.
module ctrl_regs (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [7:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [7:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  input  logic [31:0] completed,
  output logic        cfg_ppr,
  output logic [31:0] cfg_alpha,
  output logic [7:0]  cfg_max_len
);
  wire wr = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr;
  assign s_wready  = wr;
  assign s_arready = !s_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_ppr     <= 1'b0;
      cfg_alpha   <= 32'h2666_6666;   // 0.15
      cfg_max_len <= 8'd80;
      s_bvalid    <= 1'b0;
      s_rvalid    <= 1'b0;
      s_rdata     <= '0;
    end else begin
      if (wr) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr[3:2])
          2'd0: cfg_ppr     <= s_wdata[0];
          2'd1: cfg_alpha   <= s_wdata;
          2'd2: cfg_max_len <= s_wdata[7:0];
          default: ;
        endcase
      end else if (s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[3:2])
          2'd0: s_rdata <= {31'd0, cfg_ppr};
          2'd1: s_rdata <= cfg_alpha;
          2'd2: s_rdata <= {24'd0, cfg_max_len};
          default: s_rdata <= completed;
        endcase
      end else if (s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end
endmodule
