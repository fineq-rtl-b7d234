// dma: moves data between off-chip memory and the on-chip buffers.
//
// One command moves cmd_len 64-bit words. A read command (cmd_write = 0)
// fetches words from byte address cmd_addr upward over the AXI read channels
// and writes them into the scratch pad from word cmd_local upward. A write
// command (cmd_write = 1) reads output-buffer words from cmd_local upward and
// stores them at cmd_addr upward over the AXI write channels. The source
// shows only a DMA block on an AXI bus; this design keeps it as simple as
// possible: AXI4-Lite style single-beat transfers, one outstanding at a time,
// full 8-byte strobes, no bursts. A response other than OKAY sets err, which
// stays set until the next command.
//
// Timing: a command is accepted when cmd_valid is high and busy is low; busy
// rises on the next clock and done pulses for one clock when the last word
// is written (scratch pad) or acknowledged (write response).
//
// Some outputs are wires on purpose: wstrb is all ones, and read data goes
// straight from m_axi_rdata to the scratch-pad write port without a register.
// The assertions sample rst_n through 'disable iff', so lint reports rst_n
// as both an asynchronous reset and a synchronous signal. Only the
// assertions use it synchronously; the logic itself resets asynchronously.
module dma #(
  parameter int AW    = 32,
  parameter int DW    = 64,
  parameter int LAW   = 13,   // local (scratch pad / output buffer) word address bits
  parameter int LEN_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid,
  input  logic             cmd_write,
  input  logic [AW-1:0]    cmd_addr,
  input  logic [LAW-1:0]   cmd_local,
  input  logic [LEN_W-1:0] cmd_len,
  output logic             busy,
  output logic             done,
  output logic             err,
  // scratch pad write port
  output logic             spad_we,
  output logic [LAW-1:0]   spad_waddr,
  output logic [DW-1:0]    spad_wdata,
  // output buffer word read port (one-clock latency)
  output logic [LAW-1:0]   obuf_raddr,
  input  logic [DW-1:0]    obuf_rdata,
  // AXI master
  output logic [AW-1:0]    m_axi_araddr,
  output logic             m_axi_arvalid,
  input  logic             m_axi_arready,
  input  logic [DW-1:0]    m_axi_rdata,
  input  logic [1:0]       m_axi_rresp,
  input  logic             m_axi_rvalid,
  output logic             m_axi_rready,
  output logic [AW-1:0]    m_axi_awaddr,
  output logic             m_axi_awvalid,
  input  logic             m_axi_awready,
  output logic [DW-1:0]    m_axi_wdata,
  output logic [DW/8-1:0]  m_axi_wstrb,
  output logic             m_axi_wvalid,
  input  logic             m_axi_wready,
  input  logic [1:0]       m_axi_bresp,
  input  logic             m_axi_bvalid,
  output logic             m_axi_bready
);

  typedef enum logic [2:0] {
    D_IDLE, D_AR, D_R, D_FETCH, D_LATCH, D_AWW, D_B
  } dma_state_e;

  dma_state_e       st;
  logic [AW-1:0]    addr;
  logic [LAW-1:0]   lcl;
  logic [LEN_W-1:0] left;
  logic             aw_done, w_done;

  assign busy          = (st != D_IDLE);
  assign m_axi_araddr  = addr;
  assign m_axi_arvalid = (st == D_AR);
  assign m_axi_rready  = (st == D_R);
  assign m_axi_awaddr  = addr;
  assign m_axi_awvalid = (st == D_AWW) && !aw_done;
  assign m_axi_wvalid  = (st == D_AWW) && !w_done;
  assign m_axi_wstrb   = '1;
  assign m_axi_bready  = (st == D_B);
  assign obuf_raddr    = lcl;
  assign spad_we       = (st == D_R) && m_axi_rvalid;
  assign spad_waddr    = lcl;
  assign spad_wdata    = m_axi_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= D_IDLE;
      addr        <= '0;
      lcl         <= '0;
      left        <= '0;
      aw_done     <= 1'b0;
      w_done      <= 1'b0;
      done        <= 1'b0;
      err         <= 1'b0;
      m_axi_wdata <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (cmd_valid) begin
          addr <= cmd_addr;
          lcl  <= cmd_local;
          left <= cmd_len;
          err  <= 1'b0;
          if (cmd_len == '0) done <= 1'b1;
          else               st   <= cmd_write ? D_FETCH : D_AR;
        end
        D_AR: if (m_axi_arready) st <= D_R;
        D_R: if (m_axi_rvalid) begin
          if (m_axi_rresp != 2'b00) err <= 1'b1;
          addr <= addr + AW'(DW/8);
          lcl  <= lcl + 1'b1;
          left <= left - 1'b1;
          if (left == LEN_W'(1)) begin st <= D_IDLE; done <= 1'b1; end
          else                         st <= D_AR;
        end
        D_FETCH: st <= D_LATCH;      // output buffer address applied
        D_LATCH: begin               // output buffer word is valid
          m_axi_wdata <= obuf_rdata;
          aw_done     <= 1'b0;
          w_done      <= 1'b0;
          st          <= D_AWW;
        end
        D_AWW: begin
          if (m_axi_awvalid && m_axi_awready) aw_done <= 1'b1;
          if (m_axi_wvalid && m_axi_wready)   w_done  <= 1'b1;
          if ((aw_done || m_axi_awready) && (w_done || m_axi_wready)) st <= D_B;
        end
        D_B: if (m_axi_bvalid) begin
          if (m_axi_bresp != 2'b00) err <= 1'b1;
          addr <= addr + AW'(DW/8);
          lcl  <= lcl + 1'b1;
          left <= left - 1'b1;
          if (left == LEN_W'(1)) begin st <= D_IDLE; done <= 1'b1; end
          else                         st <= D_FETCH;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  // AXI rule: a raised valid stays high, with stable payload, until ready
  assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr));
  assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr));
  assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata));

endmodule
