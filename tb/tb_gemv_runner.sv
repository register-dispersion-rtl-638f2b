// tb_gemv_runner: runs an integer GemV kernel, y = A * x, on one rd_vpu instance
// with NPHYS physical registers, and checks y against a reference computed here.
//
// A (M x N, 32-bit) is stored column-major, so eight consecutive rows of one
// column form one 32-byte line. The kernel keeps ACCS accumulators v1..vACCS
// (8 * ACCS rows) and one temporary, ACCS + 1 active vector registers in all:
//   vsetivli e32, vl = 8
//   for each block of 8 * ACCS rows:
//     vmv.v.i v1..vACCS, 0
//     for j in 0..N-1: for a in 1..ACCS: vle32 vT, A[rows, j]; vmacc.vx va, x[j], vT
//     vse32 v1..vACCS -> y
// The accumulators are used round-robin, so with fewer slots than active
// registers FIFO replacement evicts each register shortly before it is needed.
// The memory model grants at once and answers in one cycle, like an L1 hit.
// Reports cycles and the cVRF look-up, fill and spill counts.
module tb_gemv_runner #(
  parameter int unsigned NPHYS = 8,
  parameter int unsigned ACCS  = 8,    // accumulators, 1..30; M must be a multiple of 8 * ACCS
  parameter int unsigned M     = 64,
  parameter int unsigned N     = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    done,
  output int      checks,
  output int      failures,
  output longint  cycles,
  output longint  lookups,
  output longint  fills,
  output longint  spills
);
  import rd_pkg::*;
  import tb_ref_pkg::*;

  localparam logic [31:0] A_BASE = 32'h0000_0000;
  localparam logic [31:0] Y_BASE = 32'h0010_0000;
  localparam int unsigned ROWS   = 8 * ACCS;
  localparam logic [4:0]  VT     = 5'(ACCS + 1);

  logic             in_valid = 1'b0;
  logic [31:0]      in_instr = '0, in_rs1 = '0;
  logic             in_ready, in_illegal, xwb_valid;
  logic [31:0]      xwb_data;
  logic             mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0]      mem_addr;
  logic [VLENB-1:0] mem_be;
  vreg_t            mem_wdata, mem_rdata;
  logic [VL_W-1:0]  vl;
  sew_e             sew;
  logic [31:0]      cnt_lookups, cnt_fills, cnt_spills, cnt_stall_cycles;
  logic [$clog2(NPHYS):0] occupancy;

  rd_vpu #(.NPHYS(NPHYS)) dut (.*);
  data_mem_model #(.LAT_MIN(1), .LAT_MAX(1), .GNT_PCT(100)) u_mem (
    .clk, .rst_n, .mem_req, .mem_we, .mem_addr, .mem_be, .mem_wdata,
    .mem_gnt, .mem_rvalid, .mem_rdata);

  logic [31:0] a_m [N][M];
  logic [31:0] x_v [N];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic send(logic [31:0] instr, logic [31:0] rs1);
    @(negedge clk);
    in_valid = 1'b1; in_instr = instr; in_rs1 = rs1;
    forever begin
      #1;
      if (in_ready) break;
      @(negedge clk);
    end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    longint t0;
    vreg_t line, got, want;
    if (M % ROWS != 0 || ACCS < 1 || ACCS > 30) $fatal(1, "bad GemV shape");
    done = 0; checks = 0; failures = 0;
    for (int j = 0; j < N; j++) begin
      x_v[j] = $urandom;
      for (int r = 0; r < M; r++) a_m[j][r] = $urandom;
      for (int r = 0; r < M; r += 8) begin
        for (int k = 0; k < 8; k++) line[32*k +: 32] = a_m[j][r + k];
        u_mem.poke(A_BASE + 32'((j * M + r) * 4), line);
      end
    end
    wait (rst_n);
    @(posedge clk);
    t0 = cyc;
    send(enc_vsetivli(5'd0, 5'd8, 32), 0);
    for (int rb = 0; rb < M; rb += ROWS) begin
      for (int a = 0; a < ACCS; a++) send(enc_opv(6'b010111, 1'b1, 5'd0, 5'd0, 3'b011, 5'(1 + a)), 0);
      for (int j = 0; j < N; j++)
        for (int a = 0; a < ACCS; a++) begin
          send(enc_vle(32, 1'b1, VT, 5'd1), A_BASE + 32'((j * M + rb + 8 * a) * 4));
          send(enc_opv(6'b101101, 1'b1, VT, 5'd2, 3'b110, 5'(1 + a)), x_v[j]);
        end
      for (int a = 0; a < ACCS; a++)
        send(enc_vse(32, 1'b1, 5'(1 + a), 5'd1), Y_BASE + 32'((rb + 8 * a) * 4));
    end
    // wait until the last store has left the unit
    while (dut.idex_q.valid) @(posedge clk);
    cycles = cyc - t0;
    lookups = longint'(cnt_lookups); fills = longint'(cnt_fills); spills = longint'(cnt_spills);
    for (int r = 0; r < M; r += 8) begin
      got = u_mem.peek(Y_BASE + 32'(r * 4));
      for (int k = 0; k < 8; k++) begin
        logic [31:0] acc;
        acc = 0;
        for (int j = 0; j < N; j++) acc += a_m[j][r + k] * x_v[j];
        want[32*k +: 32] = acc;
      end
      checks++;
      if (got != want) begin
        failures++;
        $display("FAIL NPHYS=%0d ACCS=%0d: y[%0d..%0d] got %h want %h", NPHYS, ACCS, r, r + 7, got, want);
      end
    end
    done = 1;
  end
endmodule
