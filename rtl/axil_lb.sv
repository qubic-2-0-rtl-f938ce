// axil_lb: AXI4-Lite slave to local-bus bridge.
//
// The processing system reaches the gateware's registers and buffers over
// AXI; inside the gateware every register and memory hangs on a simple
// local bus (qubic_pkg::lb_req_t/lb_rsp_t: one-clock wr or rd strobe with
// a word address, read data returned later with rvalid). This bridge
// turns one AXI4-Lite transaction at a time into one local-bus access.
// Byte address bits [1:0] are dropped (32-bit words only, wstrb ignored).
// A read that gets no rvalid within TIMEOUT clocks completes with SLVERR
// and data 0xDEADBEEF. The paper names the AXI-to-local-bus blocks and
// gives four local buses; the protocol details are this design's.
// Timing: write: AW+W accepted together, lb.wr one clock later, BVALID the
// clock after. Read: AR accepted, lb.rd one clock later, RVALID the clock
// after rvalid.
module axil_lb
  import qubic_pkg::*;
#(
  parameter int ADDR_W  = LB_AW,
  parameter int TIMEOUT = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  output lb_req_t   lb_req,
  input  lb_rsp_t   lb_rsp
);
  typedef enum logic [2:0] {A_IDLE, A_WR, A_BRESP, A_RD, A_RWAIT, A_RRESP} st_e;
  st_e st;
  logic [ADDR_W-1:0] addr_r;
  logic [31:0]       wdata_r;
  logic [$clog2(TIMEOUT+1)-1:0] tmo;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= A_IDLE; addr_r <= '0; wdata_r <= '0; tmo <= '0; s_rsp <= '0; lb_req <= '0;
    end else begin
      s_rsp.awready <= 1'b0;
      s_rsp.wready  <= 1'b0;
      s_rsp.arready <= 1'b0;
      lb_req.wr     <= 1'b0;
      lb_req.rd     <= 1'b0;
      unique case (st)
        A_IDLE: begin
          if (s_req.awvalid && s_req.wvalid) begin
            s_rsp.awready <= 1'b1;
            s_rsp.wready  <= 1'b1;
            addr_r  <= s_req.awaddr[ADDR_W+1:2];
            wdata_r <= s_req.wdata;
            st      <= A_WR;
          end else if (s_req.arvalid) begin
            s_rsp.arready <= 1'b1;
            addr_r <= s_req.araddr[ADDR_W+1:2];
            st     <= A_RD;
          end
        end
        A_WR: begin
          lb_req.wr    <= 1'b1;
          lb_req.addr  <= addr_r;
          lb_req.wdata <= wdata_r;
          s_rsp.bvalid <= 1'b1;
          s_rsp.bresp  <= 2'b00;
          st <= A_BRESP;
        end
        A_BRESP: if (s_req.bready) begin
          s_rsp.bvalid <= 1'b0;
          st <= A_IDLE;
        end
        A_RD: begin
          lb_req.rd   <= 1'b1;
          lb_req.addr <= addr_r;
          tmo <= '0;
          st  <= A_RWAIT;
        end
        A_RWAIT: begin
          tmo <= tmo + 1'b1;
          if (lb_rsp.rvalid) begin
            s_rsp.rvalid <= 1'b1;
            s_rsp.rdata  <= lb_rsp.rdata;
            s_rsp.rresp  <= 2'b00;
            st <= A_RRESP;
          end else if (32'(tmo) == TIMEOUT) begin
            s_rsp.rvalid <= 1'b1;
            s_rsp.rdata  <= 32'hDEADBEEF;
            s_rsp.rresp  <= 2'b10;
            st <= A_RRESP;
          end
        end
        A_RRESP: if (s_req.rready) begin
          s_rsp.rvalid <= 1'b0;
          st <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  // AXI rule: a response, once valid, stays valid until accepted
  assert property (@(posedge clk) disable iff (!rst_n) s_rsp.bvalid && !s_req.bready |=> s_rsp.bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rsp.rvalid && !s_req.rready |=> s_rsp.rvalid);
endmodule
