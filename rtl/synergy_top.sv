// synergy_top: the Synergy accelerator fabric on the FPGA side of the SoC.
//
// N_PE processing engines (PEs) compute tiles of the matrix multiplications
// that the CNN's convolution layers are lowered to.  Each PE has four FIFOs:
// if_sw2hw and if_hw2sw connect it to its software delegate (the control
// path: start word, job addresses, job requests and completions), and
// if_hw2mem and if_mem2hw connect it to the memory subsystem.  There, PEs
// are paired: each pair shares one memory arbiter, one MMU and one AXI4
// memory controller, and all MMUs share one Proc unit through the Proc
// arbiter.  With the default 8 PEs this gives 4 arbiter/MMU/controller
// paths, one AXI4 master port each.
//
// Default configuration (the one evaluated in the paper): tile size 32,
// 6 fast PEs (loop3 fully unrolled, one output element per cycle) and
// 2 slow PEs (loop3 unrolled by 2).  SPE_MASK marks the slow PEs; PE0 and
// PE1 are the slow ones here (the paper does not say which slots they
// occupy).  FIFO depth 128 is the paper's example hw_config value.
//
// The software side (delegate threads, job queues, clusters, work stealing)
// and the DDR memory are outside this module: the delegate FIFO ends, the
// Proc unit's driver/interrupt signals and the AXI4 masters are ports.
// The observation outputs expose per-cycle events for measurement.
module synergy_top
  import synergy_pkg::*;
#(
  parameter int unsigned N_PE       = 8,
  parameter int unsigned TS         = 32,
  parameter int unsigned FIFO_DEPTH = 128,
  parameter int unsigned S_LANES    = 2,
  parameter logic [N_PE-1:0] SPE_MASK = N_PE'(2'b11),
  localparam int unsigned N_MEM     = (N_PE + 1) / 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // delegate side of if_sw2hw (write) and if_hw2sw (read), one per PE
  input  logic [N_PE-1:0]        sw2hw_valid,
  input  logic [N_PE-1:0][31:0]  sw2hw_data,
  output logic [N_PE-1:0]        sw2hw_ready,
  output logic [N_PE-1:0]        hw2sw_valid,
  output logic [N_PE-1:0][31:0]  hw2sw_data,
  input  logic [N_PE-1:0]        hw2sw_ready,
  // Proc unit, CPU / driver side
  input  logic                   cpu_pgd_valid,
  input  logic [31:0]            cpu_pgd,
  output logic                   irq,
  output logic [31:0]            fault_addr,
  // AXI4 masters to the system bus
  output axi_req_t [N_MEM-1:0]   m_axi_req,
  input  axi_rsp_t [N_MEM-1:0]   m_axi_rsp,
  output logic [N_MEM-1:0]       mem_err,
  // observation
  output logic [N_PE-1:0]        pe_kernel_active,
  output logic [N_PE-1:0]        pe_fetch_active,
  output logic [N_PE-1:0]        pe_zero_fill,
  output logic [N_PE-1:0]        pe_page_split,
  output logic [N_MEM-1:0]       arb_contention,
  output logic [N_MEM-1:0]       mmu_walk_done,
  output logic [N_MEM-1:0]       mmu_fault,
  output logic                   proc_contention
);
  localparam int unsigned NP2 = 2 * N_MEM;   // PE slots, the last may be empty

  // PE-side FIFO ends, padded to NP2 slots
  logic [NP2-1:0]       s2h_v, s2h_r, h2s_v, h2s_r;
  logic [NP2-1:0][31:0] s2h_d, h2s_d;
  logic [NP2-1:0]       h2m_v, h2m_r, m2h_v, m2h_r;
  logic [NP2-1:0][31:0] h2m_d, m2h_d;
  // arbiter-side FIFO ends
  logic [NP2-1:0]       ah2m_v, ah2m_r, am2h_v, am2h_r;
  logic [NP2-1:0][31:0] ah2m_d;
  logic [N_MEM-1:0][31:0] am2h_d;

  for (genvar i = 0; i < NP2; i++) begin : g_pe
    if (i < N_PE) begin : g_on
      localparam int unsigned LANES = SPE_MASK[i] ? S_LANES : TS;

      sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_sw2hw (
        .clk, .rst_n,
        .in_valid(sw2hw_valid[i]), .in_data(sw2hw_data[i]), .in_ready(sw2hw_ready[i]),
        .out_valid(s2h_v[i]), .out_data(s2h_d[i]), .out_ready(s2h_r[i]), .count());
      sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_hw2sw (
        .clk, .rst_n,
        .in_valid(h2s_v[i]), .in_data(h2s_d[i]), .in_ready(h2s_r[i]),
        .out_valid(hw2sw_valid[i]), .out_data(hw2sw_data[i]), .out_ready(hw2sw_ready[i]),
        .count());
      sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_hw2mem (
        .clk, .rst_n,
        .in_valid(h2m_v[i]), .in_data(h2m_d[i]), .in_ready(h2m_r[i]),
        .out_valid(ah2m_v[i]), .out_data(ah2m_d[i]), .out_ready(ah2m_r[i]), .count());
      sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_mem2hw (
        .clk, .rst_n,
        .in_valid(am2h_v[i]), .in_data(am2h_d[i/2]), .in_ready(am2h_r[i]),
        .out_valid(m2h_v[i]), .out_data(m2h_d[i]), .out_ready(m2h_r[i]), .count());

      pe #(.TS(TS), .LANES(LANES)) u_pe (
        .clk, .rst_n,
        .sw2hw_valid(s2h_v[i]),  .sw2hw_data(s2h_d[i]),  .sw2hw_ready(s2h_r[i]),
        .hw2sw_valid(h2s_v[i]),  .hw2sw_data(h2s_d[i]),  .hw2sw_ready(h2s_r[i]),
        .hw2mem_valid(h2m_v[i]), .hw2mem_data(h2m_d[i]), .hw2mem_ready(h2m_r[i]),
        .mem2hw_valid(m2h_v[i]), .mem2hw_data(m2h_d[i]), .mem2hw_ready(m2h_r[i]),
        .kernel_active(pe_kernel_active[i]), .fetch_active(pe_fetch_active[i]),
        .zero_fill(pe_zero_fill[i]), .page_split(pe_page_split[i]));
    end else begin : g_off
      // empty slot of an odd PE count: nothing ever requests memory
      assign ah2m_v[i] = 1'b0;
      assign ah2m_d[i] = '0;
      assign am2h_r[i] = 1'b1;
    end
  end

  // ---------------------------------------------------------------- memory
  logic [N_MEM-1:0]       a_req_v, a_req_r, a_wd_v, a_wd_r, a_rd_v, a_rd_r;
  mem_req_t [N_MEM-1:0]   a_req;
  logic [N_MEM-1:0][31:0] a_wd, a_rd;
  logic [N_MEM-1:0]       c_req_v, c_req_r, c_wd_v, c_wd_r, c_rd_v, c_rd_r;
  mem_req_t [N_MEM-1:0]   c_req;
  logic [N_MEM-1:0][31:0] c_wd, c_rd;
  logic [N_MEM-1:0]       p_req_v, p_req_r, p_rsp_v;
  proc_req_t [N_MEM-1:0]  p_req;
  logic [31:0]            p_rsp_pgd;

  for (genvar g = 0; g < N_MEM; g++) begin : g_mem
    mem_arbiter #(.NPORTS(2)) u_arb (
      .clk, .rst_n,
      .hw2mem_valid(ah2m_v[2*g+1:2*g]), .hw2mem_data(ah2m_d[2*g+1:2*g]),
      .hw2mem_ready(ah2m_r[2*g+1:2*g]),
      .mem2hw_valid(am2h_v[2*g+1:2*g]), .mem2hw_data(am2h_d[g]),
      .mem2hw_ready(am2h_r[2*g+1:2*g]),
      .req_valid(a_req_v[g]), .req(a_req[g]), .req_ready(a_req_r[g]),
      .wdata_valid(a_wd_v[g]), .wdata(a_wd[g]), .wdata_ready(a_wd_r[g]),
      .rdata_valid(a_rd_v[g]), .rdata(a_rd[g]), .rdata_ready(a_rd_r[g]),
      .contention(arb_contention[g]));

    mmu u_mmu (
      .clk, .rst_n,
      .up_req_valid(a_req_v[g]), .up_req(a_req[g]), .up_req_ready(a_req_r[g]),
      .up_wdata_valid(a_wd_v[g]), .up_wdata(a_wd[g]), .up_wdata_ready(a_wd_r[g]),
      .up_rdata_valid(a_rd_v[g]), .up_rdata(a_rd[g]), .up_rdata_ready(a_rd_r[g]),
      .dn_req_valid(c_req_v[g]), .dn_req(c_req[g]), .dn_req_ready(c_req_r[g]),
      .dn_wdata_valid(c_wd_v[g]), .dn_wdata(c_wd[g]), .dn_wdata_ready(c_wd_r[g]),
      .dn_rdata_valid(c_rd_v[g]), .dn_rdata(c_rd[g]), .dn_rdata_ready(c_rd_r[g]),
      .proc_req_valid(p_req_v[g]), .proc_req(p_req[g]), .proc_req_ready(p_req_r[g]),
      .proc_rsp_valid(p_rsp_v[g]), .proc_rsp_pgd(p_rsp_pgd),
      .walk_done(mmu_walk_done[g]), .fault(mmu_fault[g]));

    mem_controller u_mc (
      .clk, .rst_n,
      .req_valid(c_req_v[g]), .req(c_req[g]), .req_ready(c_req_r[g]),
      .wdata_valid(c_wd_v[g]), .wdata(c_wd[g]), .wdata_ready(c_wd_r[g]),
      .rdata_valid(c_rd_v[g]), .rdata(c_rd[g]), .rdata_ready(c_rd_r[g]),
      .axi_req(m_axi_req[g]), .axi_rsp(m_axi_rsp[g]), .err(mem_err[g]));
  end

  // ---------------------------------------------------------------- Proc
  logic        pu_req_v, pu_req_r, pu_rsp_v;
  proc_req_t   pu_req;
  logic [31:0] pu_rsp_pgd;

  proc_arbiter #(.NPORTS(N_MEM)) u_parb (
    .clk, .rst_n,
    .mmu_req_valid(p_req_v), .mmu_req(p_req), .mmu_req_ready(p_req_r),
    .mmu_rsp_valid(p_rsp_v), .mmu_rsp_pgd(p_rsp_pgd),
    .proc_req_valid(pu_req_v), .proc_req(pu_req), .proc_req_ready(pu_req_r),
    .proc_rsp_valid(pu_rsp_v), .proc_rsp_pgd(pu_rsp_pgd),
    .contention(proc_contention));

  proc_unit u_proc (
    .clk, .rst_n,
    .cpu_pgd_valid, .cpu_pgd, .irq, .fault_addr,
    .req_valid(pu_req_v), .req(pu_req), .req_ready(pu_req_r),
    .rsp_valid(pu_rsp_v), .rsp_pgd(pu_rsp_pgd));
endmodule
