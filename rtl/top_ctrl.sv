// top_ctrl: top controller with instruction memory.
//
// A host writes a program into the instruction memory through the I/O port
// (imem_we/imem_addr/imem_wdata) while the accelerator is idle, then pulses
// run. The controller executes instructions from address 0:
//   OP_GEMM  starts the address generator for one 16-token FP-INT GeMM and
//            waits until it has issued every read and all n_tiles/4 output
//            groups have been written back to the activation buffer;
//   OP_VEC   routes the vector-unit input port to the output path (BPC or
//            plain FP16 store) and waits for n_tiles/4 groups of 16 words;
//   OP_END   returns to idle and pulses done.
// For every instruction it presents the instruction to the rest of the design
// and pulses wr_init to load the write-address counters, then start (GEMM only)
// one cycle later.
//
// The paper names the instruction memory, its I/O programming and that the
// controller governs the address generator; the instruction set, its encoding
// (instr_t in anda_pkg) and the memory depth are this design's choices.
module top_ctrl
  import anda_pkg::*;
#(
  parameter int IMEM_DEPTH = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // I/O programming interface
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t                        imem_wdata,
  input  logic                          run,
  output logic                          busy,
  output logic                          done,
  // to the datapath
  output instr_t                        instr,
  output logic                          wr_init,
  output logic                          gemm_start,
  output logic                          vec_mode,
  input  logic                          ag_done,     // address generator issued all reads
  input  logic                          group_written // one output group fully stored
);

  typedef enum logic [2:0] {C_IDLE, C_FETCH, C_ISSUE, C_WAIT} cstate_e;
  cstate_e state;

  instr_t imem [IMEM_DEPTH];
  logic [$clog2(IMEM_DEPTH)-1:0] pc;
  logic [7:0] groups_written;
  logic       issue_done;
  logic [7:0] groups_needed;

  assign groups_needed = {2'b00, instr.n_tiles[7:2]};
  assign busy          = (state != C_IDLE);
  assign vec_mode      = (state == C_WAIT) && (instr.op == OP_VEC);

  always_ff @(posedge clk) begin
    if (imem_we && state == C_IDLE) imem[imem_addr] <= imem_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; pc <= '0; instr <= '0; done <= 1'b0;
      wr_init <= 1'b0; gemm_start <= 1'b0; groups_written <= '0; issue_done <= 1'b0;
    end else begin
      done       <= 1'b0;
      wr_init    <= 1'b0;
      gemm_start <= 1'b0;
      if (group_written) groups_written <= groups_written + 1'b1;
      if (ag_done) issue_done <= 1'b1;
      case (state)
        C_IDLE: if (run) begin
          pc    <= '0;
          state <= C_FETCH;
        end
        C_FETCH: begin
          instr <= imem[pc];
          state <= C_ISSUE;
        end
        C_ISSUE: begin
          groups_written <= '0;
          if (instr.op == OP_END) begin
            state <= C_IDLE;
            done  <= 1'b1;
          end else begin
            wr_init    <= 1'b1;
            gemm_start <= (instr.op == OP_GEMM);
            issue_done <= (instr.op != OP_GEMM);
            state      <= C_WAIT;
          end
        end
        C_WAIT: if (issue_done && groups_written == groups_needed) begin
          pc    <= pc + 1'b1;
          state <= C_FETCH;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
