// axi_mem_model: behavioural model of off-chip memory with an AXI4-Lite
// style slave port (single beats, 64-bit data), for simulation only.
//
// Holds WORDS 64-bit words (word = byte address / 8). Ready and valid
// signals are delayed by random wait states (0..3 clocks) when STALL is set,
// so the master's handshakes see back-pressure. Reads return mem[addr/8]
// one or more clocks after the address; writes update mem when both the
// address and the data beat have been taken, then answer on B. Every response
// is OKAY. stall_cycles counts clocks in which a valid was not accepted.
module axi_mem_model #(
  parameter int WORDS = 65536,
  parameter bit STALL = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [63:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  input  logic [31:0] awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic [7:0]  wstrb,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  output int          stall_cycles
);

  logic [63:0] mem [WORDS];
  logic        aw_got, w_got;
  logic [31:0] aw_q;
  logic [63:0] w_q;

  function automatic logic rnd_ready();
    return STALL ? ($urandom_range(0, 2) != 0) : 1'b1;
  endfunction

  assign rresp = 2'b00;
  assign bresp = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; rdata <= '0;
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      aw_got <= 1'b0; w_got <= 1'b0; aw_q <= '0; w_q <= '0;
      stall_cycles <= 0;
    end else begin
      if ((arvalid && !arready) || (awvalid && !awready) || (wvalid && !wready))
        stall_cycles <= stall_cycles + 1;
      // read
      arready <= 1'b0;
      if (arvalid && arready) begin
        rdata  <= mem[araddr[31:3] % WORDS];
        rvalid <= 1'b1;
      end else if (arvalid && !rvalid) arready <= rnd_ready();
      if (rvalid && rready) rvalid <= 1'b0;
      // write
      awready <= 1'b0;
      wready  <= 1'b0;
      if (awvalid && awready) begin aw_got <= 1'b1; aw_q <= awaddr; end
      else if (awvalid && !aw_got && !bvalid) awready <= rnd_ready();
      if (wvalid && wready) begin
        w_got <= 1'b1; w_q <= wdata;
        assert (wstrb == 8'hff) else $error("partial strobes not modelled");
      end
      else if (wvalid && !w_got && !bvalid) wready <= rnd_ready();
      if (aw_got && w_got && !bvalid) begin
        mem[aw_q[31:3] % WORDS] <= w_q;
        bvalid <= 1'b1;
        aw_got <= 1'b0;
        w_got  <= 1'b0;
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end

endmodule
