// axi_lite_loader: AXI4-Lite slave through which the processor loads traces
// and parameters into the buffers and reads back results.
//
// A write completes when both its address (AW) and data (W) have been
// accepted, in either order; the loader then pulses wr_en for one cycle
// with the word address (byte address / 4) and data, and answers OKAY on
// B. Only full-word writes are supported (wstrb must be all ones). A read
// presents the word address on rd_addr in the cycle AR is accepted and
// returns rd_data, sampled in that cycle, on R with OKAY. One write and one
// read may be outstanding at a time. Decoding of the word address is left
// to the instantiating module. The original design names the AXI bus as the
// path from the processor to its buffers; this slave is this design's own.
module axi_lite_loader
  import klinq_pkg::*;
#(
  parameter int ADDR_W = WADDR_W + 2
) (
  input  logic                clk,
  input  logic                rst_n,
  // write address
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [ADDR_W-1:0]   s_awaddr,
  // write data
  input  logic                s_wvalid,
  output logic                s_wready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  // write response
  output logic                s_bvalid,
  input  logic                s_bready,
  output logic [1:0]          s_bresp,
  // read address
  input  logic                s_arvalid,
  output logic                s_arready,
  input  logic [ADDR_W-1:0]   s_araddr,
  // read data
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  // buffer side
  output logic                wr_en,
  output logic [ADDR_W-3:0]   wr_addr,
  output logic [31:0]         wr_data,
  output logic [ADDR_W-3:0]   rd_addr,
  input  logic [31:0]         rd_data
);

  logic aw_full, w_full;
  logic [ADDR_W-3:0] aw_word;

  assign s_awready = !aw_full;
  assign s_wready  = !w_full;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign rd_addr   = s_araddr[ADDR_W-1:2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_full  <= 1'b0;
      w_full   <= 1'b0;
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      wr_en    <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      if (s_awvalid && s_awready) begin
        aw_full <= 1'b1;
        aw_word <= s_awaddr[ADDR_W-1:2];
      end
      if (s_wvalid && s_wready) begin
        w_full  <= 1'b1;
        wr_data <= s_wdata;
      end
      // Both halves present and the response channel free: commit.
      if (aw_full && w_full && !s_bvalid) begin
        wr_en    <= 1'b1;
        wr_addr  <= aw_word;
        aw_full  <= 1'b0;
        w_full   <= 1'b0;
        s_bvalid <= 1'b1;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_data;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  a_full_words: assert property (@(posedge clk) disable iff (!rst_n)
                                 s_wvalid |-> s_wstrb == 4'hf)
    else $error("axi_lite_loader: partial-word write");
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
