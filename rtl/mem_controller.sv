// mem_controller: AXI4 burst master between one MMU and the system bus.
//
// The paper's memory controllers "access the DDR memory with AXI4 burst
// mode protocol".  Each physical request {write, address, bytes} becomes a
// single INCR burst of bytes/4 beats of 32 bits (AxSIZE = 4 bytes, AxLEN =
// beats - 1, at most 256 beats; the PEs never ask for more than a tile row
// and never cross a 4 KiB page, as AXI4 requires).
//   read:  AR handshake, then R beats are passed to rdata until RLAST;
//   write: AW handshake, then W beats are taken from wdata (WLAST on the
//          last beat), then the B response is awaited.
// One request is handled at a time and the next request is accepted only
// after the previous one has finished (after B for writes), so writes are
// in memory before any later read.  A non-OKAY RRESP or BRESP raises the
// sticky err output.  Data width, single outstanding burst and the error
// flag are this design's choices.
module mem_controller
  import synergy_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // from the MMU (physical)
  input  logic        req_valid,
  input  mem_req_t    req,
  output logic        req_ready,
  input  logic        wdata_valid,
  input  logic [31:0] wdata,
  output logic        wdata_ready,
  output logic        rdata_valid,
  output logic [31:0] rdata,
  input  logic        rdata_ready,
  // AXI4 master
  output axi_req_t    axi_req,
  input  axi_rsp_t    axi_rsp,
  output logic        err
);
  typedef enum logic [2:0] { C_IDLE, C_AR, C_R, C_AW, C_W, C_B } cst_t;
  cst_t        st;
  logic [31:0] addr;
  logic [7:0]  alen, wcnt;

  always_comb begin
    axi_req         = '0;
    axi_req.awaddr  = addr;
    axi_req.awlen   = alen;
    axi_req.awsize  = AXI_SIZE_4B;
    axi_req.awburst = AXI_BURST_INCR;
    axi_req.awvalid = (st == C_AW);
    axi_req.wdata   = wdata;
    axi_req.wstrb   = 4'hF;
    axi_req.wlast   = (wcnt == alen);
    axi_req.wvalid  = (st == C_W) && wdata_valid;
    axi_req.bready  = (st == C_B);
    axi_req.araddr  = addr;
    axi_req.arlen   = alen;
    axi_req.arsize  = AXI_SIZE_4B;
    axi_req.arburst = AXI_BURST_INCR;
    axi_req.arvalid = (st == C_AR);
    axi_req.rready  = (st == C_R) && rdata_ready;
    req_ready       = (st == C_IDLE);
    wdata_ready     = (st == C_W) && axi_rsp.wready;
    rdata_valid     = (st == C_R) && axi_rsp.rvalid;
    rdata           = axi_rsp.rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= C_IDLE;
      addr <= '0;
      alen <= '0;
      wcnt <= '0;
      err  <= 1'b0;
    end else begin
      unique case (st)
        C_IDLE: if (req_valid) begin
          addr <= req.addr;
          alen <= 8'(req.len[23:2] - 22'd1);
          wcnt <= '0;
          st   <= req.write ? C_AW : C_AR;
        end
        C_AR: if (axi_rsp.arready) st <= C_R;
        C_R: if (axi_rsp.rvalid && rdata_ready) begin
          if (axi_rsp.rresp != 2'b00) err <= 1'b1;
          if (axi_rsp.rlast) st <= C_IDLE;
        end
        C_AW: if (axi_rsp.awready) st <= C_W;
        C_W: if (wdata_valid && axi_rsp.wready) begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == alen) st <= C_B;
        end
        C_B: if (axi_rsp.bvalid) begin
          if (axi_rsp.bresp != 2'b00) err <= 1'b1;
          st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  a_burst_len: assert property (@(posedge clk) disable iff (!rst_n)
    (st == C_IDLE && req_valid) |->
      (req.len != 0 && req.len[1:0] == 2'b00 && req.len[23:2] <= 22'(MAX_BEATS)));
  a_no_4k_cross: assert property (@(posedge clk) disable iff (!rst_n)
    (st == C_IDLE && req_valid) |->
      (({12'd0, req.addr[11:0]} + req.len) <= 24'(PAGE_BYTES)));
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (axi_req.arvalid && !axi_rsp.arready) |=> axi_req.arvalid && $stable(axi_req.araddr));
endmodule
