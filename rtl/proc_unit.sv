// proc_unit: keeps the L1 page-table base and services page faults.
//
// The L1 table base lives in a CPU system register that only kernel code
// can read, so the driver hands it to the fabric: it writes it here with
// cpu_pgd_valid / cpu_pgd.  MMUs reach this unit through the Proc arbiter
// with two kinds of request:
//   - "get base" (fault = 0): answered as soon as a base is known;
//   - "page fault" (fault = 1): the unit latches the faulting virtual
//     address, raises irq, and waits until the CPU has resolved the fault
//     and written a (possibly new) base; it then drops irq and answers.
// The paper gives this function ("obtains the base address of the L1 page
// table via its device driver", "triggers a CPU interrupt, obtains a new
// base address and repeats the translation"); the signal-level interface
// is this design's.  Responses are one-cycle pulses on rsp_valid.
module proc_unit
  import synergy_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // CPU / driver side
  input  logic        cpu_pgd_valid,
  input  logic [31:0] cpu_pgd,
  output logic        irq,
  output logic [31:0] fault_addr,
  // MMU side (through the Proc arbiter)
  input  logic        req_valid,
  input  proc_req_t   req,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [31:0] rsp_pgd
);
  typedef enum logic [1:0] { R_IDLE, R_WAIT_BASE, R_FAULT, R_RSP } rst_t;
  rst_t        st;
  logic [31:0] pgd;
  logic        pgd_ok;

  assign req_ready = (st == R_IDLE);
  assign rsp_valid = (st == R_RSP);
  assign rsp_pgd   = pgd;
  assign irq       = (st == R_FAULT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= R_IDLE;
      pgd        <= '0;
      pgd_ok     <= 1'b0;
      fault_addr <= '0;
    end else begin
      if (cpu_pgd_valid) begin
        pgd    <= cpu_pgd;
        pgd_ok <= 1'b1;
      end
      unique case (st)
        R_IDLE: if (req_valid) begin
          if (req.fault) begin
            fault_addr <= req.vaddr;
            st         <= R_FAULT;
          end else begin
            st <= (pgd_ok || cpu_pgd_valid) ? R_RSP : R_WAIT_BASE;
          end
        end
        R_WAIT_BASE: if (cpu_pgd_valid) st <= R_RSP;
        R_FAULT:     if (cpu_pgd_valid) st <= R_RSP;
        R_RSP:       st <= R_IDLE;
        default:     st <= R_IDLE;
      endcase
    end
  end
endmodule
