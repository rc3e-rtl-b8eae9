// matmul_core: example user design for a vFPGA, a streaming N x N
// single-precision matrix multiplication C = A * B.
//
// The paper evaluates the framework with a matrix multiplication built with
// high-level synthesis (16 x 16 with up to four cores, 32 x 32 with up to
// two), fed through the vFPGA's stream FIFOs. It gives no micro-architecture;
// this one is written for clarity and is this design's own:
//   LOAD  pop 2*N*N words from the input stream: A row by row, then B row by
//         row, into register arrays;
//   MAC   for output row i, N cycles; in cycle k every column j does
//         acc[j] = acc[j] + A[i][k] * B[k][j] with N multipliers and N
//         adders working in parallel (multiply rounded, then add rounded);
//   OUT   write acc[0..N-1], row i of C, to the output stream, one word per
//         clock while the output FIFO is not full.
// Rows repeat until C is complete, then the core counts the product and
// returns to LOAD. With the streams never stalling one product takes
// 2*N*N (load) + N*(N+N) (compute and output) = 4*N*N clocks.
//
// Command and status through the ucs (byte addresses, own choice):
//   ucs[0x00] bit 0  run: the core takes input only while it is set
//                    (written by the host, the "start" of the host API);
//   ucs[0x80]        number of finished products, modulo 256.
// run is registered from the ucs read port, so it acts two clocks after the
// command byte changes, and it reads as clear while the core is in reset.
// The core uses only these two bytes, so ucs_raddr is tied to 0x00 and
// ucs_waddr always carries 0x80 when ucs_we is high.
// Stream ports follow the FIFOs: in_rd pops a word shown on in_data while
// in_empty is low; out_wr pushes out_data while out_full is low.
module matmul_core
  import fp32_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned UCS_AW = 8
) (
  input  logic              clk,
  input  logic              rst,          // asynchronous, active high
  // input stream (from the write FIFO)
  input  logic              in_empty,
  input  logic [31:0]       in_data,
  output logic              in_rd,
  // output stream (to the read FIFO)
  input  logic              out_full,
  output logic              out_wr,
  output logic [31:0]       out_data,
  // ucs user port
  output logic [UCS_AW-1:0] ucs_raddr,
  input  logic [7:0]        ucs_rdata,
  output logic              ucs_we,
  output logic [UCS_AW-1:0] ucs_waddr,
  output logic [7:0]        ucs_wdata
);
  localparam int unsigned IW = $clog2(N);
  localparam int unsigned LW = $clog2(2 * N * N);

  typedef enum logic [1:0] {S_LOAD, S_MAC, S_OUT} state_e;

  state_e          state;
  logic [LW-1:0]   ld_cnt;
  logic [IW-1:0]   row, kk, col;
  logic [7:0]      done_cnt;
  logic            run;

  logic [31:0] a_mem [N*N];
  logic [31:0] b_mem [N][N];
  logic [31:0] acc   [N];

  assign ucs_raddr = '0;

  assign in_rd    = (state == S_LOAD) && run && !in_empty;
  assign out_wr   = (state == S_OUT) && !out_full;
  assign out_data = acc[col];

  // Operand storage.
  always_ff @(posedge clk) begin
    if (in_rd) begin
      if (ld_cnt < LW'(N * N)) a_mem[ld_cnt[2*IW-1:0]] <= in_data;
      else                     b_mem[ld_cnt[2*IW-1:IW]][ld_cnt[IW-1:0]] <= in_data;
    end
  end

  // Multiply-accumulate: all N columns of row `row` in parallel.
  always_ff @(posedge clk) begin
    if (state == S_MAC) begin
      for (int j = 0; j < int'(N); j++)
        acc[j] <= fp32_add((kk == '0) ? 32'd0 : acc[j],
                           fp32_mul(a_mem[{row, kk}], b_mem[kk][j]));
    end
  end

  // Control.
  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      run       <= 1'b0;
      state     <= S_LOAD;
      ld_cnt    <= '0;
      row       <= '0;
      kk        <= '0;
      col       <= '0;
      done_cnt  <= '0;
      ucs_we    <= 1'b0;
      ucs_waddr <= '0;
      ucs_wdata <= '0;
    end else begin
      run    <= ucs_rdata[0];
      ucs_we <= 1'b0;
      unique case (state)
        S_LOAD: if (in_rd) begin
          if (ld_cnt == LW'(2 * N * N - 1)) begin
            ld_cnt <= '0;
            row    <= '0;
            kk     <= '0;
            state  <= S_MAC;
          end else begin
            ld_cnt <= ld_cnt + 1'b1;
          end
        end
        S_MAC: begin
          if (kk == IW'(N - 1)) begin
            col   <= '0;
            state <= S_OUT;
          end
          kk <= kk + 1'b1;
        end
        S_OUT: if (out_wr) begin
          col <= col + 1'b1;
          if (col == IW'(N - 1)) begin
            kk  <= '0;
            row <= row + 1'b1;
            if (row == IW'(N - 1)) begin
              done_cnt  <= done_cnt + 1'b1;
              ucs_we    <= 1'b1;
              ucs_waddr <= UCS_AW'(2 ** (UCS_AW - 1));
              ucs_wdata <= done_cnt + 1'b1;
              state     <= S_LOAD;
            end else begin
              state <= S_MAC;
            end
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
