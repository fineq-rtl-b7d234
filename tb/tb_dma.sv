// tb_dma: the DMA against the behavioural AXI memory with random wait states.
//
// A read command of 40 words must write mem[base/8 + i] into scratch-pad word
// local + i for every i, in order; a write command of 24 words must store the
// output-buffer words (modelled here with the one-clock read latency) at the
// target addresses. Also checks busy/done and that back-pressure occurred.
module tb_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_write = 0, busy, done, err;
  logic [31:0] cmd_addr = '0;
  logic [12:0] cmd_local = '0;
  logic [15:0] cmd_len = '0;
  logic spad_we;
  logic [12:0] spad_waddr, obuf_raddr;
  logic [63:0] spad_wdata, obuf_rdata;
  logic [31:0] araddr, awaddr;
  logic arvalid, arready, rvalid, rready, awvalid, awready, wvalid, wready, bvalid, bready;
  logic [63:0] rdata, wdata;
  logic [1:0] rresp, bresp;
  logic [7:0] wstrb;
  int stall_cycles;
  int checks = 0, failures = 0, nwr = 0;
  logic [63:0] obuf_model [8192];

  dma dut (
    .clk, .rst_n, .cmd_valid, .cmd_write, .cmd_addr, .cmd_local, .cmd_len, .busy, .done, .err,
    .spad_we, .spad_waddr, .spad_wdata, .obuf_raddr, .obuf_rdata,
    .m_axi_araddr(araddr), .m_axi_arvalid(arvalid), .m_axi_arready(arready),
    .m_axi_rdata(rdata), .m_axi_rresp(rresp), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awvalid(awvalid), .m_axi_awready(awready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.WORDS(4096)) u_mem (
    .clk, .rst_n, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready,
    .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .stall_cycles);

  always_ff @(posedge clk) obuf_rdata <= obuf_model[obuf_raddr];

  // scratch-pad writes must arrive in address order with the memory's data
  always @(posedge clk) if (rst_n && spad_we) begin
    checks++;
    if (spad_waddr != 13'(100 + nwr) || spad_wdata != u_mem.mem[64 + nwr]) begin
      failures++;
      if (failures < 5) $display("spad write %0d: addr %0d data %h", nwr, spad_waddr, spad_wdata);
    end
    nwr++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = {$urandom, $urandom};
    for (int i = 0; i < 8192; i++) obuf_model[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // read 40 words from byte 512 into scratch pad word 100
    @(negedge clk);
    cmd_valid = 1; cmd_write = 0; cmd_addr = 32'd512; cmd_local = 13'd100; cmd_len = 16'd40;
    @(negedge clk);
    cmd_valid = 0;
    checks++;
    if (!busy) failures++;
    while (!done) @(negedge clk);
    checks += 2;
    if (nwr != 40) failures++;
    if (err) failures++;
    @(negedge clk);
    checks++;
    if (busy) failures++;
    // write 24 output-buffer words from word 7 to byte 8192
    cmd_valid = 1; cmd_write = 1; cmd_addr = 32'd8192; cmd_local = 13'd7; cmd_len = 16'd24;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int i = 0; i < 24; i++) begin
      checks++;
      if (u_mem.mem[1024 + i] !== obuf_model[7 + i]) begin
        failures++;
        if (failures < 5) $display("mem word %0d got %h exp %h", i, u_mem.mem[1024+i], obuf_model[7+i]);
      end
    end
    checks++;
    if (u_mem.mem[1024 + 24] === obuf_model[31]) failures++;   // nothing past the end
    checks++;
    if (stall_cycles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
