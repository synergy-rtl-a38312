// mmu: virtual-to-physical translation for the PEs behind one memory arbiter.
//
// PEs see the user-space (virtual) addresses of the job records and the
// feature-map arrays, so every burst is translated before it reaches the
// memory controller.  The translation is the ARM two-level page-table walk
// the paper draws (Fig. 6):
//   1. the L1 table base R comes from the Proc unit (asked for once, after
//      reset, and again after every page fault);
//   2. the L1 descriptor is read at R[31:14] : VA[31:20] : 00;
//   3. a descriptor of type "page table" (bits [1:0] = 01) gives the L2
//      table base, bits [31:10];
//   4. the L2 descriptor is read at base : VA[19:12] : 00;
//   5. a small-page descriptor (bit 1 = 1) gives the physical page,
//      bits [31:12], which is joined with the page offset VA[11:0].
// Any other descriptor is a page fault: the MMU reports the address to the
// Proc unit (through the Proc arbiter), waits for the new table base and
// walks again.  The bit positions are those of the ARMv7 short-descriptor
// format used by the Cortex-A9 the paper targets; the paper's figure names
// the fields but prints no bit numbers.  The paper mentions no TLB, so every
// burst is walked (two single-word reads); a burst must not cross a 4 KiB
// page, which the PEs guarantee.
//
// Upstream is the memory arbiter (request, write data, read data),
// downstream the memory controller.  After the translated request is
// accepted the data streams are passed straight through until len/4 beats
// have gone by.  Descriptor reads use the same downstream port; their data
// is consumed here and never reaches the arbiter.
module mmu
  import synergy_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // from the memory arbiter (virtual)
  input  logic        up_req_valid,
  input  mem_req_t    up_req,
  output logic        up_req_ready,
  input  logic        up_wdata_valid,
  input  logic [31:0] up_wdata,
  output logic        up_wdata_ready,
  output logic        up_rdata_valid,
  output logic [31:0] up_rdata,
  input  logic        up_rdata_ready,
  // to the memory controller (physical)
  output logic        dn_req_valid,
  output mem_req_t    dn_req,
  input  logic        dn_req_ready,
  output logic        dn_wdata_valid,
  output logic [31:0] dn_wdata,
  input  logic        dn_wdata_ready,
  input  logic        dn_rdata_valid,
  input  logic [31:0] dn_rdata,
  output logic        dn_rdata_ready,
  // to the Proc arbiter
  output logic        proc_req_valid,
  output proc_req_t   proc_req,
  input  logic        proc_req_ready,
  input  logic        proc_rsp_valid,
  input  logic [31:0] proc_rsp_pgd,
  // observation
  output logic        walk_done,     // pulses when a translation completes
  output logic        fault          // pulses when a page fault is reported
);
  typedef enum logic [3:0] {
    U_IDLE, U_PGD_REQ, U_PGD_RSP, U_L1_REQ, U_L1_DATA, U_L2_REQ, U_L2_DATA,
    U_FAULT_REQ, U_FAULT_RSP, U_FWD, U_XFER
  } ust_t;
  ust_t        st;
  mem_req_t    vreq;
  logic [31:0] pgd, desc, paddr;
  logic        pgd_ok;
  logic [21:0] beats;

  always_comb begin
    up_req_ready   = (st == U_IDLE);
    dn_req_valid   = 1'b0;
    dn_req         = vreq;
    proc_req_valid = 1'b0;
    proc_req       = '{fault: (st == U_FAULT_REQ), vaddr: vreq.addr};
    dn_wdata_valid = 1'b0;
    dn_wdata       = up_wdata;
    up_wdata_ready = 1'b0;
    up_rdata_valid = 1'b0;
    up_rdata       = dn_rdata;
    dn_rdata_ready = 1'b0;
    unique case (st)
      U_PGD_REQ, U_FAULT_REQ: proc_req_valid = 1'b1;
      U_L1_REQ: begin
        dn_req_valid = 1'b1;
        dn_req       = '{write: 1'b0, addr: {pgd[31:14], vreq.addr[31:20], 2'b00}, len: 24'd4};
      end
      U_L2_REQ: begin
        dn_req_valid = 1'b1;
        dn_req       = '{write: 1'b0, addr: {desc[31:10], vreq.addr[19:12], 2'b00}, len: 24'd4};
      end
      U_L1_DATA, U_L2_DATA: dn_rdata_ready = 1'b1;
      U_FWD: begin
        dn_req_valid = 1'b1;
        dn_req       = '{write: vreq.write, addr: paddr, len: vreq.len};
      end
      U_XFER: begin
        if (vreq.write) begin
          dn_wdata_valid = up_wdata_valid;
          up_wdata_ready = dn_wdata_ready;
        end else begin
          up_rdata_valid = dn_rdata_valid;
          dn_rdata_ready = up_rdata_ready;
        end
      end
      default: ;
    endcase
  end

  assign walk_done = (st == U_L2_DATA) && dn_rdata_valid && dn_rdata[1];
  assign fault     = (st == U_FAULT_REQ) && proc_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= U_IDLE;
      vreq   <= '0;
      pgd    <= '0;
      pgd_ok <= 1'b0;
      desc   <= '0;
      paddr  <= '0;
      beats  <= '0;
    end else begin
      unique case (st)
        U_IDLE: if (up_req_valid) begin
          vreq  <= up_req;
          beats <= up_req.len[23:2];
          st    <= pgd_ok ? U_L1_REQ : U_PGD_REQ;
        end
        U_PGD_REQ:   if (proc_req_ready) st <= U_PGD_RSP;
        U_FAULT_REQ: if (proc_req_ready) st <= U_FAULT_RSP;
        U_PGD_RSP, U_FAULT_RSP: if (proc_rsp_valid) begin
          pgd    <= proc_rsp_pgd;
          pgd_ok <= 1'b1;
          st     <= U_L1_REQ;
        end
        U_L1_REQ: if (dn_req_ready) st <= U_L1_DATA;
        U_L1_DATA: if (dn_rdata_valid) begin
          desc <= dn_rdata;
          st   <= (dn_rdata[1:0] == 2'b01) ? U_L2_REQ : U_FAULT_REQ;
        end
        U_L2_REQ: if (dn_req_ready) st <= U_L2_DATA;
        U_L2_DATA: if (dn_rdata_valid) begin
          paddr <= {dn_rdata[31:12], vreq.addr[11:0]};
          st    <= dn_rdata[1] ? U_FWD : U_FAULT_REQ;
        end
        U_FWD: if (dn_req_ready) st <= U_XFER;
        U_XFER: begin
          if (vreq.write ? (up_wdata_valid && dn_wdata_ready)
                         : (dn_rdata_valid && up_rdata_ready)) begin
            beats <= beats - 1'b1;
            if (beats == 22'd1) st <= U_IDLE;
          end
        end
        default: st <= U_IDLE;
      endcase
    end
  end

  a_no_page_cross: assert property (@(posedge clk) disable iff (!rst_n)
    (st == U_FWD) |-> (({12'd0, vreq.addr[11:0]} + 24'(vreq.len)) <= 24'(PAGE_BYTES)));
endmodule
