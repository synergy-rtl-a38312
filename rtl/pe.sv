// pe: processing engine for tiled single-precision matrix multiplication.
//
// One PE computes one "job" at a time: the output tile C(t1,t2) of
// C[n x m] = A[n x k] * B[k x m] (row-major float matrices in virtual
// memory).  Its life, as in the paper's PE template:
//   1. wait for the start word from its software delegate on if_sw2hw;
//   2. loop: send a job request on if_hw2sw, receive the job's address on
//      if_sw2hw, read the 9-word job record from memory;
//   3. for every K tile t3: fetch the TS x TS tiles A(t1,t3) and B(t3,t2)
//      into local buffers a and b, and accumulate c += a * b;
//   4. write the tile c back to memory and send a completion word carrying
//      the job's layer id on if_hw2sw.
//
// Tile buffers.  a and b are double buffered: while the kernel works on one
// copy the fetch engine fills the other with the next K tile, so transfer
// time hides behind compute (paper: "instantiating two buffers for each
// local array").  Elements that lie outside the matrix borders are written
// as zero when fetching, and write-back skips them (the paper's zero
// padding), so any n, m, k work with the fixed tile size.
//
// Kernel.  Loops i and j of the tile are flattened and pipelined; loop3 over
// the TS products of one c[i][j] is unrolled LANES ways through
// fp32_mac_tree.  LANES = TS is the fast PE (F-PE, the paper's pipelining
// at loop2: one c element per cycle, II = 1 because a and b are fully
// partitioned along k); LANES = 2 is the slow PE (S-PE, unroll factor 2 at
// loop3: TS/2 cycles per element).  The kernel therefore issues for
// exactly TS*TS*(TS/LANES) cycles per K tile; kernel_active is high in
// those cycles.  A two-stage pipeline (operand registers, then tree +
// accumulate) adds one cycle of drain per job.
//
// Memory traffic.  Each tile row is one burst on if_hw2mem: command word
// {write, 0, bytes}, virtual address, then the data (writes) or the data
// back on if_mem2hw (reads).  A burst that would cross a 4 KiB page is split
// at the boundary because the MMU translates one page per burst; the
// page_split output pulses when that happens.  Command-word formats, the
// split and the two-state handshake (valid/ready on every FIFO port) are
// this design's choices; the paper gives the flow, not the encodings.
//
// TS must be a power of two and LANES a power of two dividing TS.
module pe
  import synergy_pkg::*;
#(
  parameter int unsigned TS    = 32,
  parameter int unsigned LANES = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // if_sw2hw (read side)
  input  logic        sw2hw_valid,
  input  logic [31:0] sw2hw_data,
  output logic        sw2hw_ready,
  // if_hw2sw (write side)
  output logic        hw2sw_valid,
  output logic [31:0] hw2sw_data,
  input  logic        hw2sw_ready,
  // if_hw2mem (write side)
  output logic        hw2mem_valid,
  output logic [31:0] hw2mem_data,
  input  logic        hw2mem_ready,
  // if_mem2hw (read side)
  input  logic        mem2hw_valid,
  input  logic [31:0] mem2hw_data,
  output logic        mem2hw_ready,
  // observation
  output logic        kernel_active,  // kernel issues a MAC step this cycle
  output logic        fetch_active,   // tile fetch engine busy this cycle
  output logic        zero_fill,      // a padding zero is written into a or b
  output logic        page_split      // a burst is cut at a page boundary
);
  localparam int unsigned STEPS = TS / LANES;
  localparam int unsigned TW    = $clog2(TS);
  localparam int unsigned CW    = ($clog2(TS + 1) > 4) ? $clog2(TS + 1) : 4;
  localparam int unsigned SW    = (STEPS > 1) ? $clog2(STEPS) : 1;

  // ------------------------------------------------------------ storage
  logic [31:0] abuf [2][TS][TS];   // [copy][i][k]
  logic [31:0] bbuf [2][TS][TS];   // [copy][k][j]
  logic [31:0] cbuf [TS][TS];      // [i][j]
  logic [31:0] job_w [JOB_WORDS];

  wire [31:0] j_a  = job_w[0];
  wire [31:0] j_b  = job_w[1];
  wire [31:0] j_c  = job_w[2];
  wire [31:0] j_m  = job_w[3];
  wire [31:0] j_n  = job_w[4];
  wire [31:0] j_k  = job_w[5];
  wire [31:0] j_t1 = job_w[6];
  wire [31:0] j_t2 = job_w[7];
  wire [31:0] j_id = job_w[8];
  wire [31:0] kt   = (j_k + 32'(TS - 1)) >> TW;   // number of K tiles

  // ------------------------------------------------------------ states
  typedef enum logic [2:0] {
    M_WAIT_START, M_REQ_JOB, M_GET_ADDR, M_READ_JOB, M_TILES, M_WB, M_ACK
  } main_t;
  typedef enum logic [2:0] {
    X_IDLE, X_WAITBUF, X_ROW, X_CMD, X_ADDR, X_DATA, X_ZERO, X_NEXT
  } xst_t;
  typedef enum logic [1:0] { XM_JOB, XM_A, XM_B, XM_C } xmode_t;
  typedef enum logic [1:0] { K_IDLE, K_WAIT, K_RUN, K_DRAIN } kst_t;

  main_t   mst;
  xst_t    xst;
  xmode_t  xmode;
  kst_t    kst;

  logic [31:0]   job_addr;
  logic [TW-1:0] x_row;
  logic [CW-1:0] x_col, x_nvalid, x_total;
  logic [31:0]   x_addr;
  logic [10:0]   x_chunk;
  logic [31:0]   x_t3;
  logic          x_buf;
  logic [1:0]    buf_full;

  logic [31:0]   k_t3;
  logic          k_buf;
  logic [TW-1:0] k_i, k_j;
  logic [SW-1:0] k_step;

  // stage-1 pipeline registers
  logic                    s1_valid, s1_first, s1_last, s1_init;
  logic [TW-1:0]           s1_i, s1_j;
  logic [LANES-1:0][31:0]  opa, opb;
  logic [31:0]             acc;

  // ------------------------------------------------------------ row setup
  logic [31:0]   row_r, row_addr, rem_w, cols_left;
  logic          row_ok;
  logic [CW-1:0] row_nvalid, row_total;

  logic [31:0]   col_base, col_dim, limit;

  always_comb begin
    row_r    = '0;
    row_ok   = 1'b1;
    row_addr = job_addr;
    col_base = '0;
    col_dim  = 32'(JOB_WORDS);
    limit    = 32'(JOB_WORDS);
    unique case (xmode)
      XM_JOB: ;
      XM_A: begin
        row_r    = (j_t1 << TW) + 32'(x_row);
        row_ok   = row_r < j_n;
        col_base = x_t3 << TW;
        col_dim  = j_k;
        row_addr = j_a + ((row_r * j_k + col_base) << 2);
        limit    = 32'(TS);
      end
      XM_B: begin
        row_r    = (x_t3 << TW) + 32'(x_row);
        row_ok   = row_r < j_k;
        col_base = j_t2 << TW;
        col_dim  = j_m;
        row_addr = j_b + ((row_r * j_m + col_base) << 2);
        limit    = 32'(TS);
      end
      XM_C: begin
        row_r    = (j_t1 << TW) + 32'(x_row);
        row_ok   = row_r < j_n;
        col_base = j_t2 << TW;
        col_dim  = j_m;
        row_addr = j_c + ((row_r * j_m + col_base) << 2);
        limit    = 32'(TS);
      end
    endcase
    cols_left = col_dim - col_base;
    if (!row_ok || col_base >= col_dim) row_nvalid = '0;
    else if (cols_left > limit)         row_nvalid = CW'(limit);
    else                                row_nvalid = CW'(cols_left);
    // reads pad the row to its full length, write-back skips the padding
    row_total = (xmode == XM_C) ? row_nvalid : CW'(limit);
    rem_w = 32'(x_nvalid - x_col);
  end

  // chunk of the current burst: up to the row end or the page end
  logic [10:0] page_w, chunk_w;
  always_comb begin
    page_w  = 11'((13'd4096 - {1'b0, x_addr[11:0]}) >> 2);
    chunk_w = (rem_w < 32'(page_w)) ? 11'(rem_w) : page_w;
  end

  // ------------------------------------------------------------ FIFO ports
  wire x_write = (xmode == XM_C);

  always_comb begin
    sw2hw_ready  = (mst == M_WAIT_START) || (mst == M_GET_ADDR);
    hw2sw_valid  = (mst == M_REQ_JOB) || (mst == M_ACK);
    hw2sw_data   = (mst == M_ACK) ? {OP_JOB_DONE, j_id[23:0]} : {OP_JOB_REQ, 24'd0};
    hw2mem_valid = 1'b0;
    hw2mem_data  = '0;
    unique case (xst)
      X_CMD:  begin hw2mem_valid = 1'b1; hw2mem_data = {x_write, 7'd0, 24'(chunk_w) << 2}; end
      X_ADDR: begin hw2mem_valid = 1'b1; hw2mem_data = x_addr; end
      X_DATA: if (x_write) begin
        hw2mem_valid = 1'b1;
        hw2mem_data  = cbuf[x_row][x_col[TW-1:0]];
      end
      default: ;
    endcase
    mem2hw_ready  = (xst == X_DATA) && !x_write;
    kernel_active = (kst == K_RUN);
    fetch_active  = (xst != X_IDLE) && (xmode == XM_A || xmode == XM_B);
    zero_fill     = (xst == X_ZERO);
    page_split    = (xst == X_CMD) && hw2mem_ready && (32'(chunk_w) < rem_w);
  end

  wire x_beat = (xst == X_DATA) &&
                (x_write ? hw2mem_ready : mem2hw_valid);

  // ------------------------------------------------------------ kernel datapath
  logic [31:0] psum, acc_sum, acc_n, c_sum, c_new;
  fp32_mac_tree #(.LANES(LANES)) u_tree (.a(opa), .b(opb), .sum(psum));
  fp32_add u_acc (.a(acc), .b(psum), .y(acc_sum));
  assign acc_n = s1_first ? psum : acc_sum;
  fp32_add u_cadd (.a(cbuf[s1_i][s1_j]), .b(acc_n), .y(c_sum));
  assign c_new = s1_init ? acc_n : c_sum;

  // ------------------------------------------------------------ control
  wire k_last_issue = (k_i == TW'(TS - 1)) && (k_j == TW'(TS - 1)) &&
                      (k_step == SW'(STEPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mst      <= M_WAIT_START;
      xst      <= X_IDLE;
      xmode    <= XM_JOB;
      kst      <= K_IDLE;
      job_addr <= '0;
      x_row    <= '0;
      x_col    <= '0;
      x_nvalid <= '0;
      x_total  <= '0;
      x_addr   <= '0;
      x_chunk  <= '0;
      x_t3     <= '0;
      x_buf    <= 1'b0;
      buf_full <= '0;
      k_t3     <= '0;
      k_buf    <= 1'b0;
      k_i      <= '0;
      k_j      <= '0;
      k_step   <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_init  <= 1'b0;
      s1_i     <= '0;
      s1_j     <= '0;
      acc      <= '0;
    end else begin
      // ---------------- main sequence
      unique case (mst)
        M_WAIT_START: if (sw2hw_valid) mst <= M_REQ_JOB;
        M_REQ_JOB:    if (hw2sw_ready) mst <= M_GET_ADDR;
        M_GET_ADDR: if (sw2hw_valid) begin
          job_addr <= sw2hw_data;
          xmode    <= XM_JOB;
          x_row    <= '0;
          xst      <= X_ROW;
          mst      <= M_READ_JOB;
        end
        M_READ_JOB: if (xst == X_IDLE) begin
          xmode    <= XM_A;
          x_row    <= '0;
          x_t3     <= '0;
          x_buf    <= 1'b0;
          xst      <= X_WAITBUF;
          k_t3     <= '0;
          k_buf    <= 1'b0;
          k_i      <= '0;
          k_j      <= '0;
          k_step   <= '0;
          kst      <= K_WAIT;
          mst      <= M_TILES;
        end
        M_TILES: if (kst == K_DRAIN && !s1_valid) begin
          kst   <= K_IDLE;
          xmode <= XM_C;
          x_row <= '0;
          xst   <= X_ROW;
          mst   <= M_WB;
        end
        M_WB:  if (xst == X_IDLE) mst <= M_ACK;
        M_ACK: if (hw2sw_ready) mst <= M_REQ_JOB;
        default: mst <= M_WAIT_START;
      endcase

      // ---------------- transfer engine (job read, tile fetch, write-back)
      unique case (xst)
        X_IDLE: ;
        X_WAITBUF: if (!buf_full[x_buf]) xst <= X_ROW;
        X_ROW: begin
          x_col    <= '0;
          x_addr   <= row_addr;
          x_nvalid <= row_nvalid;
          x_total  <= row_total;
          if (row_nvalid != '0)     xst <= X_CMD;
          else if (row_total != '0) xst <= X_ZERO;
          else                      xst <= X_NEXT;
        end
        X_CMD: if (hw2mem_ready) begin
          x_chunk <= chunk_w;
          xst     <= X_ADDR;
        end
        X_ADDR: if (hw2mem_ready) xst <= X_DATA;
        X_DATA: if (x_beat) begin
          x_col   <= x_col + 1'b1;
          x_addr  <= x_addr + 32'd4;
          x_chunk <= x_chunk - 1'b1;
          if (x_chunk == 11'd1) begin
            if (x_col + 1'b1 < x_nvalid)     xst <= X_CMD;
            else if (x_col + 1'b1 < x_total) xst <= X_ZERO;
            else                             xst <= X_NEXT;
          end
        end
        X_ZERO: begin
          x_col <= x_col + 1'b1;
          if (x_col + 1'b1 >= x_total) xst <= X_NEXT;
        end
        X_NEXT: begin
          unique case (xmode)
            XM_JOB: xst <= X_IDLE;
            XM_A: begin
              if (x_row == TW'(TS - 1)) xmode <= XM_B;
              x_row <= x_row + 1'b1;
              xst   <= X_ROW;
            end
            XM_B: begin
              x_row <= x_row + 1'b1;
              if (x_row == TW'(TS - 1)) begin
                x_t3  <= x_t3 + 1'b1;
                x_buf <= ~x_buf;
                xmode <= XM_A;
                xst   <= (x_t3 + 1 == kt) ? X_IDLE : X_WAITBUF;
              end else begin
                xst <= X_ROW;
              end
            end
            XM_C: begin
              x_row <= x_row + 1'b1;
              xst   <= (x_row == TW'(TS - 1)) ? X_IDLE : X_ROW;
            end
          endcase
        end
        default: xst <= X_IDLE;
      endcase

      // ---------------- kernel
      s1_valid <= 1'b0;
      unique case (kst)
        K_IDLE: ;
        K_WAIT: if (buf_full[k_buf]) kst <= K_RUN;
        K_RUN: begin
          for (int l = 0; l < LANES; l++) begin
            opa[l] <= abuf[k_buf][k_i][int'(k_step) * LANES + l];
            opb[l] <= bbuf[k_buf][int'(k_step) * LANES + l][k_j];
          end
          s1_valid <= 1'b1;
          s1_i     <= k_i;
          s1_j     <= k_j;
          s1_first <= (k_step == '0);
          s1_last  <= (k_step == SW'(STEPS - 1));
          s1_init  <= (k_t3 == '0);
          if (k_step == SW'(STEPS - 1)) begin
            k_step <= '0;
            k_j    <= k_j + 1'b1;
            if (k_j == TW'(TS - 1)) k_i <= k_i + 1'b1;
          end else begin
            k_step <= k_step + 1'b1;
          end
          if (k_last_issue) begin
            k_buf <= ~k_buf;
            k_t3  <= k_t3 + 1'b1;
            kst   <= (k_t3 + 1 == kt) ? K_DRAIN : K_WAIT;
          end
        end
        K_DRAIN: ;
      endcase
      if (s1_valid) acc <= acc_n;

      // buffer hand-over between fetch (sets) and kernel (clears)
      if (xst == X_NEXT && xmode == XM_B && x_row == TW'(TS - 1))
        buf_full[x_buf] <= 1'b1;
      if (kst == K_RUN && k_last_issue)
        buf_full[k_buf] <= 1'b0;
    end
  end

  // ------------------------------------------------------------ buffer writes
  wire        fill_we = (x_beat && !x_write) || (xst == X_ZERO);
  wire [31:0] fill_d  = (xst == X_ZERO) ? 32'd0 : mem2hw_data;

  always_ff @(posedge clk) begin
    if (fill_we) begin
      unique case (xmode)
        XM_JOB:  job_w[x_col[3:0]] <= fill_d;
        XM_A:    abuf[x_buf][x_row][x_col[TW-1:0]] <= fill_d;
        XM_B:    bbuf[x_buf][x_row][x_col[TW-1:0]] <= fill_d;
        default: ;
      endcase
    end
    if (s1_valid && s1_last) cbuf[s1_i][s1_j] <= c_new;
  end

  // ------------------------------------------------------------ checks
  initial begin
    assert ((TS & (TS - 1)) == 0 && TS >= 2) else $error("pe: TS must be a power of two");
    assert (LANES <= TS && (TS % LANES) == 0) else $error("pe: LANES must divide TS");
  end
  a_no_zero_k: assert property (@(posedge clk) disable iff (!rst_n)
    (mst == M_READ_JOB && xst == X_IDLE) |-> (j_k != 0));
  a_one_buf_each: assert property (@(posedge clk) disable iff (!rst_n)
    (kst == K_RUN) |-> buf_full[k_buf]);
endmodule
