// axi_local_bus: AXI4-Lite slave to local-bus converter (first half of the
// memory controller).
//
// The ARM reaches the parameter memories through the 100 MHz full-power-
// domain AXI bus, while the memories and the stitch logic run at 500 MHz.
// This block accepts one 32-bit AXI4-Lite read or write at a time, turns it
// into a single one-cycle access on a 14-bit word-addressed local bus in the
// 500 MHz domain, and returns the write response or the read data.
//
// Address map (this design's choice): local word address = AXI byte address
// bits [15:2]; AXI address bit 16 set selects the stitch control registers
// (ctrl_sel) instead of the parameter memories. Higher bits are ignored.
// WSTRB is ignored (all writes are full words); responses are always OKAY.
//
// Clock crossing: the published design reuses a vendor clock-converter IP;
// here a toggle request/acknowledge handshake with two-flop synchronisers
// is used. The request payload is held stable in the AXI domain from before
// the request toggles until the acknowledge returns, and the read data is
// held stable in the local domain from before the acknowledge toggles, so
// only the two toggle bits cross through synchronisers.
//
// Timing: a write is acknowledged (BVALID) about 2 AXI cycles + 3 local
// cycles after both AW and W have been accepted; a read (RVALID) about one
// local cycle later, after the memory's read latency. Resets are
// synchronous and active low, one per clock domain.
module axi_local_bus
  import stitch_pkg::*;
#(
  parameter int unsigned AXI_AW = 32
) (
  // AXI4-Lite slave, aclk domain
  input  logic              aclk,
  input  logic              aresetn,
  input  logic [AXI_AW-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [DATA_W-1:0] s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [AXI_AW-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [DATA_W-1:0] s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // local bus, clk domain
  input  logic              clk,
  input  logic              rst_n,
  output lb_req_t           lb_req,
  input  logic [DATA_W-1:0] lb_rdata,
  input  logic              lb_rvalid
);

  // ------------------------------------------------------------ AXI domain
  typedef enum logic [2:0] {A_IDLE, A_WAIT_W, A_WAIT_R, A_BRESP, A_RRESP} a_state_e;
  a_state_e a_state;

  logic              have_aw, have_w;
  logic [AXI_AW-1:0] aw_addr_q;
  logic [DATA_W-1:0] w_data_q;

  // request payload, stable while a request is in flight
  logic              p_we;
  logic              p_ctrl;
  logic [LB_AW-1:0]  p_addr;
  logic [DATA_W-1:0] p_wdata;
  logic              req_tgl;

  logic [2:0]        ack_sync;   // [1:0] synchroniser, [2] previous
  logic              ack_edge;
  logic [DATA_W-1:0] rd_hold;    // local-domain read data, stable at ack
  logic              ack_tgl;    // local-domain acknowledge toggle

  assign s_axi_awready = (a_state == A_IDLE) && !have_aw;
  assign s_axi_wready  = (a_state == A_IDLE) && !have_w;
  assign s_axi_arready = (a_state == A_IDLE) && !have_aw && !have_w && !s_axi_awvalid && !s_axi_wvalid;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign ack_edge      = ack_sync[1] ^ ack_sync[2];

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      a_state      <= A_IDLE;
      have_aw      <= 1'b0;
      have_w       <= 1'b0;
      aw_addr_q    <= '0;
      w_data_q     <= '0;
      p_we         <= 1'b0;
      p_ctrl       <= 1'b0;
      p_addr       <= '0;
      p_wdata      <= '0;
      req_tgl      <= 1'b0;
      ack_sync     <= '0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      ack_sync <= {ack_sync[1], ack_sync[0], ack_tgl};
      unique case (a_state)
        A_IDLE: begin
          if (s_axi_awvalid && s_axi_awready) begin
            have_aw   <= 1'b1;
            aw_addr_q <= s_axi_awaddr;
          end
          if (s_axi_wvalid && s_axi_wready) begin
            have_w   <= 1'b1;
            w_data_q <= s_axi_wdata;
          end
          if (have_aw && have_w) begin
            p_we    <= 1'b1;
            p_ctrl  <= aw_addr_q[LB_AW+2];
            p_addr  <= aw_addr_q[LB_AW+1:2];
            p_wdata <= w_data_q;
            req_tgl <= ~req_tgl;
            have_aw <= 1'b0;
            have_w  <= 1'b0;
            a_state <= A_WAIT_W;
          end else if (s_axi_arvalid && s_axi_arready) begin
            p_we    <= 1'b0;
            p_ctrl  <= s_axi_araddr[LB_AW+2];
            p_addr  <= s_axi_araddr[LB_AW+1:2];
            req_tgl <= ~req_tgl;
            a_state <= A_WAIT_R;
          end
        end
        A_WAIT_W: if (ack_edge) begin
          s_axi_bvalid <= 1'b1;
          a_state      <= A_BRESP;
        end
        A_WAIT_R: if (ack_edge) begin
          s_axi_rvalid <= 1'b1;
          s_axi_rdata  <= rd_hold;
          a_state      <= A_RRESP;
        end
        A_BRESP: if (s_axi_bready) begin
          s_axi_bvalid <= 1'b0;
          a_state      <= A_IDLE;
        end
        A_RRESP: if (s_axi_rready) begin
          s_axi_rvalid <= 1'b0;
          a_state      <= A_IDLE;
        end
        default: a_state <= A_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------- local domain
  logic [2:0] req_sync;   // [1:0] synchroniser, [2] previous
  logic       req_edge;
  logic       wait_rd;

  assign req_edge = req_sync[1] ^ req_sync[2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_sync <= '0;
      ack_tgl  <= 1'b0;
      wait_rd  <= 1'b0;
      rd_hold  <= '0;
      lb_req   <= '0;
    end else begin
      req_sync <= {req_sync[1], req_sync[0], req_tgl};
      lb_req   <= '0;
      if (req_edge) begin
        lb_req.we       <= p_we;
        lb_req.re       <= !p_we;
        lb_req.ctrl_sel <= p_ctrl;
        lb_req.addr     <= p_addr;
        lb_req.wdata    <= p_wdata;
        if (p_we) ack_tgl <= ~ack_tgl;
        else      wait_rd <= 1'b1;
      end
      if (wait_rd && lb_rvalid) begin
        rd_hold <= lb_rdata;
        wait_rd <= 1'b0;
        ack_tgl <= ~ack_tgl;
      end
    end
  end

  // AXI rule: a response stays valid until it is taken.
  a_bvalid_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
