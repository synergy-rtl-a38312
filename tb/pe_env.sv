// pe_env: one PE with a software-delegate model and a memory model.
//
// The delegate model sends the start word, answers every job request with
// the address of the next job record and collects the completion words.
// The memory model speaks the PE's FIFO protocol directly (command word,
// address, data) with identity address mapping and random stalls.
// The environment multiplies A[N x K] by B[K x M] with sizes that are not
// multiples of TS, so tiles are padded, and places A across a 4 KiB page
// boundary so bursts are split.  It then checks every element of C against
// a reference that adds the products in the PE's order, checks that no
// word next to C was written, that every layer id came back, and that the
// kernel issued for exactly jobs * kt * TS * TS * (TS / LANES) cycles.
//
// Paper vs. choice: the job flow (start, request, job record, tiles, layer-id
// acknowledgement) follows the paper; the word encodings and sizes are the
// test's own.  Timing: the memory model adds random one-cycle stalls.
module pe_env #(
  parameter int unsigned TS    = 4,
  parameter int unsigned LANES = 4,
  parameter int unsigned N     = 6,
  parameter int unsigned K     = 9,
  parameter int unsigned M     = 7
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  import tb_fp_pkg::*;
  import synergy_pkg::*;

  localparam int unsigned STEPS = TS / LANES;
  localparam int unsigned T1N = (N + TS - 1) / TS;
  localparam int unsigned T2N = (M + TS - 1) / TS;
  localparam int unsigned KT  = (K + TS - 1) / TS;
  localparam int unsigned NJOBS = T1N * T2N;
  localparam logic [31:0] A_BASE = 32'h0000_0FE8;   // rows straddle 0x1000
  localparam logic [31:0] B_BASE = 32'h0000_2000;
  localparam logic [31:0] C_BASE = 32'h0000_3000;
  localparam logic [31:0] J_BASE = 32'h0000_0800;

  logic        sw2hw_valid, sw2hw_ready, hw2sw_valid, hw2sw_ready;
  logic [31:0] sw2hw_data, hw2sw_data;
  logic        hw2mem_valid, hw2mem_ready, mem2hw_valid, mem2hw_ready;
  logic [31:0] hw2mem_data, mem2hw_data;
  logic        kernel_active, fetch_active, zero_fill, page_split;

  pe #(.TS(TS), .LANES(LANES)) dut (.*);

  logic [31:0] mem [logic [31:0]];    // word address -> word
  logic [31:0] av [N][K];
  logic [31:0] bv [K][M];

  function automatic logic [31:0] rd(input logic [31:0] byte_addr);
    return mem.exists(byte_addr >> 2) ? mem[byte_addr >> 2] : 32'hDEAD_BEEF;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [TS=%0d LANES=%0d] %s", TS, LANES, what);
    end
  endtask

  // ---------------------------------------------------------------- memory
  initial begin
    hw2mem_ready = 1'b0;
    mem2hw_valid = 1'b0;
    mem2hw_data  = '0;
    forever begin
      logic [31:0] cmd, addr;
      int          words;
      @(negedge clk);
      hw2mem_ready = 1'b1;
      do @(posedge clk); while (!hw2mem_valid);
      cmd = hw2mem_data;
      do @(posedge clk); while (!hw2mem_valid);
      addr = hw2mem_data;
      words = int'(cmd[23:2]);
      if (cmd[31]) begin
        for (int w = 0; w < words; w++) begin
          do @(posedge clk); while (!hw2mem_valid);
          mem[(addr >> 2) + 32'(w)] = hw2mem_data;
        end
        @(negedge clk);
        hw2mem_ready = 1'b0;
      end else begin
        @(negedge clk);
        hw2mem_ready = 1'b0;
        for (int w = 0; w < words; w++) begin
          while ($urandom % 4 == 0) @(negedge clk);   // random stall
          mem2hw_valid = 1'b1;
          mem2hw_data  = rd(addr + 32'(4 * w));
          do @(posedge clk); while (!mem2hw_ready);
          @(negedge clk);
          mem2hw_valid = 1'b0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- delegate
  int done_jobs = 0;
  bit id_seen [NJOBS];
  initial begin
    int next_job;
    next_job = 0;
    sw2hw_valid = 1'b0;
    sw2hw_data  = '0;
    hw2sw_ready = 1'b1;
    @(posedge rst_n);
    @(negedge clk);
    sw2hw_valid = 1'b1;                   // start signal
    sw2hw_data  = 32'h5747_4152;
    do @(posedge clk); while (!sw2hw_ready);
    @(negedge clk);
    sw2hw_valid = 1'b0;
    forever begin
      do @(posedge clk); while (!hw2sw_valid);
      if (hw2sw_data[31:24] == OP_JOB_REQ) begin
        if (next_job < NJOBS) begin
          @(negedge clk);
          sw2hw_valid = 1'b1;
          sw2hw_data  = J_BASE + 32'(36 * next_job);
          next_job++;
          do @(posedge clk); while (!sw2hw_ready);
          @(negedge clk);
          sw2hw_valid = 1'b0;
        end
      end else if (hw2sw_data[31:24] == OP_JOB_DONE) begin
        int id;
        id = int'(hw2sw_data[23:0]) - 100;
        check(id >= 0 && id < NJOBS && !id_seen[id], "layer id of completion");
        if (id >= 0 && id < NJOBS) id_seen[id] = 1'b1;
        done_jobs++;
      end else begin
        check(1'b0, "unknown hw2sw word");
      end
    end
  end

  // ---------------------------------------------------------------- counters
  longint kcycles = 0, overlap = 0, zeros = 0, splits = 0;
  always @(posedge clk) if (rst_n) begin
    if (kernel_active) kcycles++;
    if (kernel_active && fetch_active) overlap++;
    if (zero_fill) zeros++;
    if (page_split) splits++;
  end

  // ---------------------------------------------------------------- main
  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    for (int r = 0; r < N; r++) for (int c = 0; c < K; c++) begin
      av[r][c] = rand_f();
      mem[(A_BASE >> 2) + 32'(r * K + c)] = av[r][c];
    end
    for (int r = 0; r < K; r++) for (int c = 0; c < M; c++) begin
      bv[r][c] = rand_f();
      mem[(B_BASE >> 2) + 32'(r * M + c)] = bv[r][c];
    end
    for (int w = -4; w < int'(N * M) + 4; w++) mem[(C_BASE >> 2) + 32'(w)] = 32'hC0FF_EE00;
    for (int j = 0; j < NJOBS; j++) begin
      logic [31:0] rec [9];
      rec = '{A_BASE, B_BASE, C_BASE, M, N, K, j / T2N, j % T2N, 100 + j};
      for (int w = 0; w < 9; w++) mem[(J_BASE >> 2) + 32'(9 * j + w)] = rec[w];
    end

    wait (done_jobs == NJOBS);
    repeat (5) @(posedge clk);

    // reference in the PE's summation order
    for (int r = 0; r < N; r++) for (int c = 0; c < M; c++) begin
      logic [31:0] cval, acc, ps;
      logic [31:0] la [];
      logic [31:0] lb [];
      la = new[LANES];
      lb = new[LANES];
      cval = 0; acc = 0;
      for (int t3 = 0; t3 < KT; t3++) begin
        for (int s = 0; s < STEPS; s++) begin
          for (int l = 0; l < LANES; l++) begin
            int kk;
            kk = t3 * TS + s * LANES + l;
            la[l] = (kk < K) ? av[r][kk] : 32'd0;
            lb[l] = (kk < K) ? bv[kk][c] : 32'd0;
          end
          ps  = tree_sum(la, lb, LANES);
          acc = (s == 0) ? ps : fadd(acc, ps);
        end
        cval = (t3 == 0) ? acc : fadd(cval, acc);
      end
      check(rd(C_BASE + 32'(4 * (r * M + c))) == cval,
            $sformatf("C[%0d][%0d] = %h, expected %h", r, c,
                      rd(C_BASE + 32'(4 * (r * M + c))), cval));
    end
    for (int w = 1; w <= 4; w++) begin
      check(rd(C_BASE - 32'(4 * w)) == 32'hC0FF_EE00, "word before C untouched");
      check(rd(C_BASE + 32'(4 * (N * M - 1 + w))) == 32'hC0FF_EE00, "word after C untouched");
    end
    for (int j = 0; j < NJOBS; j++) check(id_seen[j], "every job completed");
    check(kcycles == longint'(NJOBS * KT * TS * TS * STEPS),
          $sformatf("kernel cycles %0d, expected %0d", kcycles, NJOBS * KT * TS * TS * STEPS));
    check(overlap > 0, "tile fetch overlapped the kernel (double buffering)");
    check(zeros > 0,   "zero padding happened");
    check(splits > 0,  "a burst was split at a page boundary");
    $display("[TS=%0d LANES=%0d] jobs=%0d kernel cycles=%0d overlap=%0d zero fills=%0d page splits=%0d",
             TS, LANES, NJOBS, kcycles, overlap, zeros, splits);
    finished = 1'b1;
  end
endmodule
