// instr_decoder: the central controller of the accelerator.
//
// A scalar, non-pipelined processor. After `start` it fetches instructions one by
// one from its local memory (instr_mem) starting at address 0. Each instruction
// takes a fetch cycle (the synchronous memory read) and an execute cycle in which
// it is decoded and, unless it is WAIT or END, issued to the datapath as a
// one-cycle command (cmd_valid with the decoded word on cmd). A WAIT instruction
// presents its module and condition on wait_mod/wait_cond and stalls the
// processor until the datapath raises wait_ok; END stops fetching and raises
// `done` until the next `start`. Without stalls this gives 0.5 instructions per
// clock; the WAIT stalls of a typical network bring it near the published 0.4.
// The two-cycle fetch/execute split is this design's choice; the absence of
// pipelining and of multi-issue is the published behaviour. Opcodes the
// decoder does not know are skipped (and flagged by an assertion).
// Performance counters report executed instructions and elapsed cycles since start.
module instr_decoder
  import e3ne_pkg::*;
#(
  parameter int unsigned AW = 15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          done,
  output logic          running,
  // instruction memory read port
  output logic [AW-1:0] imem_addr,
  input  logic [31:0]   imem_data,
  // issued command
  output logic          cmd_valid,
  output instr_t        cmd,
  // wait handshake
  output logic          wait_active,
  output logic [4:0]    wait_mod,
  output logic [1:0]    wait_cond,
  input  logic          wait_ok,
  // performance counters
  output logic [31:0]   instr_count,
  output logic [31:0]   cycle_count,
  output logic [31:0]   wait_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_WAIT, S_HALT} state_e;
  state_e         state;
  logic [AW-1:0]  pc;
  instr_t         cur, held;

  assign cur       = (state == S_EXEC) ? instr_t'(imem_data) : held;
  assign imem_addr = pc;
  assign cmd       = cur;
  assign cmd_valid = (state == S_EXEC) && (cur.op != OP_WAIT) && (cur.op != OP_END)
                     && (cur.op <= OP_WAIT);
  assign wait_active = ((state == S_EXEC) || (state == S_WAIT)) && (cur.op == OP_WAIT);
  assign wait_mod    = cur.field;
  assign wait_cond   = cur.value[22:21];
  assign done        = (state == S_HALT);
  assign running     = (state == S_FETCH) || (state == S_EXEC) || (state == S_WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pc          <= '0;
      held        <= '0;
      instr_count <= '0;
      cycle_count <= '0;
      wait_cycles <= '0;
    end else begin
      if (running) cycle_count <= cycle_count + 1;
      unique case (state)
        S_IDLE, S_HALT: begin
          if (start) begin
            state       <= S_FETCH;
            pc          <= '0;
            instr_count <= '0;
            cycle_count <= '0;
            wait_cycles <= '0;
          end
        end
        S_FETCH: state <= S_EXEC;
        S_EXEC: begin
          held        <= instr_t'(imem_data);
          instr_count <= instr_count + 1;
          pc          <= pc + 1'b1;
          if (cur.op == OP_END)                   state <= S_HALT;
          else if (cur.op == OP_WAIT && !wait_ok) state <= S_WAIT;
          else                                    state <= S_FETCH;
        end
        S_WAIT: begin
          wait_cycles <= wait_cycles + 1;
          if (wait_ok) state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && state == S_EXEC)
      assert (cur.op <= OP_WAIT) else $error("instr_decoder: unknown opcode %0d at pc %0d", cur.op, pc);
  end
endmodule
