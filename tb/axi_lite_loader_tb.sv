// axi_lite_loader_tb: AXI4-Lite master model. Writes with address before
// data, data before address, both together, and with a slow write-response
// ready; each must produce exactly one wr_en pulse with the word address
// and data, and one OKAY response. Reads must return the rd_data that the
// test derives from rd_addr, held until rready.
module axi_lite_loader_tb;
  localparam int AW = 20;

  logic clk = 0, rst_n = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [AW-1:0] awaddr = '0, araddr = '0;
  logic [31:0] wdata = '0, rdata, wr_data, rd_data;
  logic [3:0] wstrb = 4'hf;
  logic [1:0] bresp, rresp;
  logic wr_en;
  logic [AW-3:0] wr_addr, rd_addr;
  int checks = 0, failures = 0, pulses = 0;
  logic [AW-3:0] last_addr;
  logic [31:0] last_data;

  axi_lite_loader #(.ADDR_W(AW)) dut (
    .clk, .rst_n,
    .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp),
    .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp),
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  assign rd_data = {14'h2a5a, rd_addr} ^ 32'h0f0f_0f0f;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && wr_en) begin pulses++; last_addr = wr_addr; last_data = wr_data; end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input logic [AW-1:0] a, input logic [31:0] d, input int mode, input int bdelay);
    int p0 = pulses;
    fork
      begin
        if (mode == 1) repeat (3) @(negedge clk);
        @(negedge clk) awvalid = 1; awaddr = a;
        do @(posedge clk); while (!awready);
        @(negedge clk) awvalid = 0;
      end
      begin
        if (mode == 2) repeat (3) @(negedge clk);
        @(negedge clk) wvalid = 1; wdata = d;
        do @(posedge clk); while (!wready);
        @(negedge clk) wvalid = 0;
      end
    join
    while (!bvalid) @(negedge clk);
    repeat (bdelay) begin
      @(negedge clk);
      checks++;
      if (!bvalid) begin failures++; $display("bvalid dropped before bready"); end
    end
    bready = 1;
    @(negedge clk) bready = 0;
    repeat (2) @(negedge clk);
    checks += 4;
    if (pulses != p0 + 1) begin failures++; $display("wr_en pulses %0d", pulses - p0); end
    if (last_addr !== a[AW-1:2]) begin failures++; $display("wr_addr %0h exp %0h", last_addr, a[AW-1:2]); end
    if (last_data !== d) begin failures++; $display("wr_data %0h exp %0h", last_data, d); end
    if (bresp !== 2'b00) begin failures++; $display("bresp"); end
  endtask

  task automatic read(input logic [AW-1:0] a, input int rdelay);
    logic [31:0] e;
    @(negedge clk) arvalid = 1; araddr = a;
    e = {14'h2a5a, a[AW-1:2]} ^ 32'h0f0f_0f0f;
    do @(posedge clk); while (!arready);
    @(negedge clk) arvalid = 0; araddr = '0;
    while (!rvalid) @(negedge clk);
    repeat (rdelay) @(negedge clk);
    checks += 3;
    if (!rvalid) begin failures++; $display("rvalid dropped"); end
    if (rdata !== e) begin failures++; $display("rdata %0h exp %0h", rdata, e); end
    if (rresp !== 2'b00) begin failures++; $display("rresp"); end
    rready = 1;
    @(negedge clk) rready = 0;
    checks++;
    if (rvalid) begin failures++; $display("rvalid stuck"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 30; k++)
      write({$urandom} & 20'hffffc, $urandom, k % 3, $urandom_range(0, 3));
    for (int k = 0; k < 20; k++) read({$urandom} & 20'hffffc, $urandom_range(0, 3));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
