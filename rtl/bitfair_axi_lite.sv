// bitfair_axi_lite: AXI4-Lite slave that turns host transactions into
// requests on the accelerator's simple register/memory bus.
//
// One transaction is handled at a time. A write is accepted when both the
// address and the data channel are valid (AWREADY and WREADY rise together);
// a read when only the read address is valid; a write wins when both arrive.
// The request is then offered on req_* until the core accepts it
// (req_valid && req_ready); the core answers one cycle after acceptance on
// rsp_valid/rsp_rdata, and the slave returns BRESP/RRESP = OKAY and holds
// BVALID/RVALID until the host takes the response. Byte strobes are ignored:
// every register and every memory byte is one 32-bit access.
//
// The published design has an AXI interface that configures the layers and
// loads weights and activations; its chip layout labels the block
// "APB & CSR". This RTL follows the text and the architecture figure (AXI);
// the protocol subset (AXI4-Lite, one outstanding transaction) is its own.
module bitfair_axi_lite
  import bitfair_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic [31:0]        s_awaddr,
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  input  logic               s_wvalid,
  output logic               s_wready,
  output logic [1:0]         s_bresp,
  output logic               s_bvalid,
  input  logic               s_bready,
  input  logic [31:0]        s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready,
  // core request bus
  output logic               req_valid,
  input  logic               req_ready,
  output logic               req_we,
  output logic [HADDR_W-1:0] req_addr,
  output logic [31:0]        req_wdata,
  input  logic               rsp_valid,
  input  logic [31:0]        rsp_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_BRESP, S_RRESP} state_e;
  state_e state;

  logic [31:0] rdata_q;
  logic        unused_strb;
  assign unused_strb = ^s_wstrb;

  assign s_awready = (state == S_IDLE) && s_awvalid && s_wvalid;
  assign s_wready  = s_awready;
  assign s_arready = (state == S_IDLE) && s_arvalid && !(s_awvalid && s_wvalid);
  assign req_valid = (state == S_REQ);
  assign s_bvalid  = (state == S_BRESP);
  assign s_rvalid  = (state == S_RRESP);
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_rdata   = rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      req_we    <= 1'b0;
      req_addr  <= '0;
      req_wdata <= '0;
      rdata_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (s_awready) begin
            req_we <= 1'b1; req_addr <= s_awaddr[HADDR_W-1:0]; req_wdata <= s_wdata;
            state  <= S_REQ;
          end else if (s_arready) begin
            req_we <= 1'b0; req_addr <= s_araddr[HADDR_W-1:0];
            state  <= S_REQ;
          end
        end
        S_REQ:   if (req_ready) state <= S_WAIT;
        S_WAIT:  if (rsp_valid) begin
                   rdata_q <= rsp_rdata;
                   state   <= req_we ? S_BRESP : S_RRESP;
                 end
        S_BRESP: if (s_bready) state <= S_IDLE;
        S_RRESP: if (s_rready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules of the AXI channels this slave drives.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req_addr));
endmodule
