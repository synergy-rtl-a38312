// proc_arbiter: lets the MMUs share the single Proc unit.
//
// Page faults are rare, so the paper lets all MMUs share one Proc unit
// through this arbiter.  Each MMU port carries a request (ask for the L1
// table base, or report a fault at an address) and receives a response
// carrying the table base.  The arbiter grants one MMU at a time, round
// robin, forwards its request, and holds the grant until the Proc unit's
// response has been returned to that MMU; other MMUs wait.  The policy is
// this design's choice: the paper names the arbiter only.
//
// Handshakes: a request is taken on an edge with mmu_req_valid and
// mmu_req_ready both high; a response is a one-cycle mmu_rsp_valid pulse on
// the granted port.  contention pulses when a grant is made while another
// port also has a request.
module proc_arbiter
  import synergy_pkg::*;
#(
  parameter int unsigned NPORTS = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // MMU side
  input  logic [NPORTS-1:0]       mmu_req_valid,
  input  proc_req_t [NPORTS-1:0]  mmu_req,
  output logic [NPORTS-1:0]       mmu_req_ready,
  output logic [NPORTS-1:0]       mmu_rsp_valid,
  output logic [31:0]             mmu_rsp_pgd,
  // Proc unit side
  output logic                    proc_req_valid,
  output proc_req_t               proc_req,
  input  logic                    proc_req_ready,
  input  logic                    proc_rsp_valid,
  input  logic [31:0]             proc_rsp_pgd,
  // observation
  output logic                    contention
);
  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  typedef enum logic [1:0] { P_IDLE, P_REQ, P_RSP } pst_t;
  pst_t          st;
  logic [PW-1:0] gnt, last;
  proc_req_t     held;

  logic [PW-1:0] pick;
  logic          any;
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int o = 1; o <= NPORTS; o++) begin
      if (!any && mmu_req_valid[(int'(last) + o) % NPORTS]) begin
        pick = PW'((int'(last) + o) % NPORTS);
        any  = 1'b1;
      end
    end
  end

  always_comb begin
    mmu_req_ready = '0;
    if (st == P_IDLE && any) mmu_req_ready[pick] = 1'b1;
    mmu_rsp_valid = '0;
    if (st == P_RSP && proc_rsp_valid) mmu_rsp_valid[gnt] = 1'b1;
    mmu_rsp_pgd    = proc_rsp_pgd;
    proc_req_valid = (st == P_REQ);
    proc_req       = held;
  end
  assign contention = (st == P_IDLE) && any && ($countones(mmu_req_valid) > 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= P_IDLE;
      gnt  <= '0;
      last <= PW'(NPORTS - 1);
      held <= '0;
    end else begin
      unique case (st)
        P_IDLE: if (any) begin
          gnt  <= pick;
          held <= mmu_req[pick];
          st   <= P_REQ;
        end
        P_REQ: if (proc_req_ready) st <= P_RSP;
        P_RSP: if (proc_rsp_valid) begin
          last <= gnt;
          st   <= P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  a_onehot_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(mmu_rsp_valid));
endmodule
