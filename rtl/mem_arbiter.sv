// mem_arbiter: shares one MMU (and so one memory controller) between PEs.
//
// The paper puts at most two PEs behind each MMU / memory-controller pair
// and places a MEM Arbiter in front of the MMU.  Each port is the read side
// of a PE's if_hw2mem FIFO and the write side of its if_mem2hw FIFO.  The
// arbiter picks a port with a pending command word (round robin, starting
// after the last winner), reads the command word {write, 0, bytes} and the
// virtual address, hands the request to the MMU, and then keeps the grant
// for the whole transfer: it forwards bytes/4 write-data words from the
// port's if_hw2mem, or returns bytes/4 read-data words into the port's
// if_mem2hw.  One transfer is in flight at a time, so read data need no
// tags.  Round robin and whole-transfer grants are this design's choices;
// the paper only says the arbiter allocates requests to the shared MMU.
//
// contention pulses in a cycle where a grant is made while another port
// also has a command waiting.
module mem_arbiter
  import synergy_pkg::*;
#(
  parameter int unsigned NPORTS = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // PE side: if_hw2mem read sides
  input  logic [NPORTS-1:0]       hw2mem_valid,
  input  logic [NPORTS-1:0][31:0] hw2mem_data,
  output logic [NPORTS-1:0]       hw2mem_ready,
  // PE side: if_mem2hw write sides
  output logic [NPORTS-1:0]       mem2hw_valid,
  output logic [31:0]             mem2hw_data,
  input  logic [NPORTS-1:0]       mem2hw_ready,
  // MMU side
  output logic                    req_valid,
  output mem_req_t                req,
  input  logic                    req_ready,
  output logic                    wdata_valid,
  output logic [31:0]             wdata,
  input  logic                    wdata_ready,
  input  logic                    rdata_valid,
  input  logic [31:0]             rdata,
  output logic                    rdata_ready,
  // observation
  output logic                    contention
);
  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  typedef enum logic [2:0] { A_IDLE, A_ADDR, A_REQ, A_WDATA, A_RDATA } ast_t;
  ast_t          st;
  logic [PW-1:0] gnt, last;
  logic          wr;
  logic [23:0]   len;
  logic [31:0]   addr;
  logic [21:0]   beats;

  // round-robin choice among ports with a word waiting
  logic [PW-1:0] pick;
  logic          any;
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int o = 1; o <= NPORTS; o++) begin
      if (!any && hw2mem_valid[(int'(last) + o) % NPORTS]) begin
        pick = PW'((int'(last) + o) % NPORTS);
        any  = 1'b1;
      end
    end
  end
  assign contention = (st == A_IDLE) && any && ($countones(hw2mem_valid) > 1);

  always_comb begin
    hw2mem_ready = '0;
    mem2hw_valid = '0;
    mem2hw_data  = rdata;
    req_valid    = (st == A_REQ);
    req          = '{write: wr, addr: addr, len: len};
    wdata_valid  = 1'b0;
    wdata        = hw2mem_data[gnt];
    rdata_ready  = 1'b0;
    unique case (st)
      A_IDLE:  if (any) hw2mem_ready[pick] = 1'b1;
      A_ADDR:  hw2mem_ready[gnt] = 1'b1;
      A_WDATA: begin
        wdata_valid       = hw2mem_valid[gnt];
        hw2mem_ready[gnt] = wdata_ready;
      end
      A_RDATA: begin
        mem2hw_valid[gnt] = rdata_valid;
        rdata_ready       = mem2hw_ready[gnt];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= A_IDLE;
      gnt   <= '0;
      last  <= PW'(NPORTS - 1);
      wr    <= 1'b0;
      len   <= '0;
      addr  <= '0;
      beats <= '0;
    end else begin
      unique case (st)
        A_IDLE: if (any) begin
          gnt   <= pick;
          wr    <= hw2mem_data[pick][31];
          len   <= hw2mem_data[pick][23:0];
          beats <= hw2mem_data[pick][23:2];
          st    <= A_ADDR;
        end
        A_ADDR: if (hw2mem_valid[gnt]) begin
          addr <= hw2mem_data[gnt];
          st   <= A_REQ;
        end
        A_REQ: if (req_ready) st <= wr ? A_WDATA : A_RDATA;
        A_WDATA: if (hw2mem_valid[gnt] && wdata_ready) begin
          beats <= beats - 1'b1;
          if (beats == 22'd1) begin last <= gnt; st <= A_IDLE; end
        end
        A_RDATA: if (rdata_valid && mem2hw_ready[gnt]) begin
          beats <= beats - 1'b1;
          if (beats == 22'd1) begin last <= gnt; st <= A_IDLE; end
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (st == A_REQ) |-> (len != 0 && len[1:0] == 2'b00));
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && !req_ready) |=> req_valid && $stable(req));
endmodule
