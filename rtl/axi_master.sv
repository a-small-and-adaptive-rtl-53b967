// AXI master of the coprocessor. Two word-wide client ports, port 0 for the
// dispatcher (tag annotations in DDR) and port 1 for the TMC (tag memory),
// share one AXI4 master port towards the DDR. Clients use the
// request/acknowledge bus of dift_pkg: a request is held until a one-cycle
// ack, which carries the read data and an error flag (SLVERR/DECERR).
// Arbitration is round robin between the two ports; one transaction is
// outstanding at a time and every transaction is a single 32-bit beat
// (LEN 0, SIZE 4 bytes, INCR). A write drives AW and W together.
// Follows the paper: an AXI master between the coprocessor and the DDR.
// Own choices: everything else (the paper only names it).
// The handshake assertions sample rst_n in 'disable iff', while the flops
// use it as an asynchronous reset; lint reports that mix, and it is intended.
module axi_master
  import dift_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  mem_req_t  c_req [2],
  output mem_rsp_t  c_rsp [2],
  output axi_req_t  m_axi_req,
  input  axi_rsp_t  m_axi_rsp
);
  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_AW, S_B, S_ACK} state_e;
  state_e      st;
  logic        cur;          // client being served
  logic        last;         // last client served
  logic        aw_done, w_done;
  logic [31:0] addr_q, wdata_q, rdata_q;
  logic        err_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cur     <= 1'b0;
      last    <= 1'b1;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      rdata_q <= '0;
      err_q   <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (c_req[0].req || c_req[1].req) begin
            logic pick;
            if (c_req[0].req && c_req[1].req) pick = ~last;
            else                               pick = c_req[1].req;
            cur     <= pick;
            addr_q  <= c_req[pick].addr;
            wdata_q <= c_req[pick].wdata;
            aw_done <= 1'b0;
            w_done  <= 1'b0;
            st      <= c_req[pick].we ? S_AW : S_AR;
          end
        end
        S_AR: if (m_axi_rsp.arready) st <= S_R;
        S_R: if (m_axi_rsp.rvalid) begin
          rdata_q <= m_axi_rsp.rdata;
          err_q   <= m_axi_rsp.rresp[1];
          st      <= S_ACK;
        end
        S_AW: begin
          if (m_axi_rsp.awready) aw_done <= 1'b1;
          if (m_axi_rsp.wready)  w_done  <= 1'b1;
          if ((aw_done || m_axi_rsp.awready) && (w_done || m_axi_rsp.wready)) st <= S_B;
        end
        S_B: if (m_axi_rsp.bvalid) begin
          err_q <= m_axi_rsp.bresp[1];
          st    <= S_ACK;
        end
        default: begin
          last <= cur;
          st   <= S_IDLE;
        end
      endcase
    end
  end

  always_comb begin
    m_axi_req         = '0;
    m_axi_req.awaddr  = addr_q;
    m_axi_req.araddr  = addr_q;
    m_axi_req.wdata   = wdata_q;
    m_axi_req.wstrb   = 4'hF;
    m_axi_req.wlast   = 1'b1;
    m_axi_req.awsize  = 3'd2;
    m_axi_req.arsize  = 3'd2;
    m_axi_req.awburst = 2'b01;
    m_axi_req.arburst = 2'b01;
    m_axi_req.arvalid = (st == S_AR);
    m_axi_req.rready  = (st == S_R);
    m_axi_req.awvalid = (st == S_AW) && !aw_done;
    m_axi_req.wvalid  = (st == S_AW) && !w_done;
    m_axi_req.bready  = (st == S_B);
    for (int i = 0; i < 2; i++) begin
      c_rsp[i].ack   = (st == S_ACK) && (cur == 1'(i));
      c_rsp[i].rdata = rdata_q;
      c_rsp[i].err   = err_q;
    end
  end

`ifndef SYNTHESIS
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_axi_req.arvalid && !m_axi_rsp.arready |=> m_axi_req.arvalid && $stable(m_axi_req.araddr));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_axi_req.awvalid && !m_axi_rsp.awready |=> m_axi_req.awvalid && $stable(m_axi_req.awaddr));
`endif
endmodule
