// nmp_core_model -- behavioural stand-in for the in-order near-memory core,
// for testbenches only (not synthesizable, not part of the design).
//
// Runs N_TASKS offloaded tasks of G instructions back to back on an MRCN
// top. A task is cut into NUM_SEC equal sections by breakpoints. One
// instruction issues per cycle; it accesses the shared region (K_LINES
// lines at BASE) with probability F_NMP percent, as a store with probability
// STORE_PCT percent. Addresses and kinds are a hash of (SEED, task,
// position), so a re-execution replays the same accesses. The core obeys
// stall and restarts from the reported rollback point.
//
// Outputs the statistics the evaluation looks at: total cycles, instructions
// executed (first runs plus re-executions), rollbacks, and done when every
// task has committed.
module nmp_core_model
  import mrcn_pkg::*;
#(
  parameter int NUM_SEC   = 5,
  parameter int G         = 100,
  parameter int F_NMP     = 50,
  parameter int STORE_PCT = 30,
  parameter int N_TASKS   = 10,
  parameter int K_LINES   = 1024,
  parameter int SEED      = 1,
  parameter logic [31:0] BASE = 32'h4000_0000,
  localparam int SEC_W = (NUM_SEC > 1) ? $clog2(NUM_SEC) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             task_start,
  output logic [PC_W-1:0]  start_pc,
  output logic [CTX_W-1:0] start_ctx,
  output logic             bp_mark,
  output logic [PC_W-1:0]  bp_pc,
  output logic [CTX_W-1:0] bp_ctx,
  output logic             task_end,
  output logic             acc_valid,
  output logic             acc_we,
  output addr_t            acc_addr,
  output data_t            acc_wdata,
  input  logic             stall,
  input  logic             restart,
  input  logic [SEC_W-1:0] restart_sec,
  input  logic [PC_W-1:0]  restart_pc,
  input  logic             task_done,
  output logic             done,
  output longint           cycles,
  output longint           instrs,
  output int               rollbacks,
  output int               tasks_done
);

  function automatic int unsigned mix(int unsigned a, int unsigned b, int unsigned c);
    int unsigned x;
    x = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 13);
    return x;
  endfunction

  typedef enum {C_IDLE, C_RUN, C_WAIT, C_FIN} cstate_e;
  cstate_e st;
  int tid, pos, csec, attempt;

  function automatic int bound(int s);
    return s * G / NUM_SEC;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; tid <= 1; pos <= 0; csec <= 0; attempt <= 0;
      task_start <= 0; bp_mark <= 0; task_end <= 0; acc_valid <= 0; acc_we <= 0;
      start_pc <= '0; start_ctx <= '0; bp_pc <= '0; bp_ctx <= '0; acc_addr <= '0; acc_wdata <= '0;
      done <= 0; cycles <= 0; instrs <= 0; rollbacks <= 0; tasks_done <= 0;
    end else begin
      task_start <= 0; bp_mark <= 0; task_end <= 0; acc_valid <= 0; acc_we <= 0;
      if (st != C_FIN) cycles <= cycles + 1;
      case (st)
        C_IDLE: begin
          task_start <= 1; start_pc <= 0; start_ctx <= {32'(tid), 32'd0};
          pos <= 0; csec <= 0; attempt <= 0;
          st <= C_RUN;
        end
        C_RUN: if (!stall && !task_end) begin
          if (csec < NUM_SEC - 1 && pos == bound(csec + 1)) begin
            bp_mark <= 1; bp_pc <= 32'(pos); bp_ctx <= {32'(tid), 32'(csec + 1)};
            csec <= csec + 1;
          end else if (pos >= G) begin
            task_end <= 1;
            st <= C_WAIT;
          end else begin
            int unsigned h;
            h = mix(SEED, tid, pos);
            if (h % 100 < F_NMP) begin
              acc_valid <= 1;
              acc_we    <= ((h >> 8) % 100) < STORE_PCT;
              acc_addr  <= BASE + addr_t'((mix(SEED + 1, tid, pos) % K_LINES) * 64 + ((h >> 16) % 8) * 8);
              acc_wdata <= {32'(tid), 16'(attempt), 16'(pos)};
            end
            pos    <= pos + 1;
            instrs <= instrs + 1;
          end
        end
        C_WAIT: begin
          if (restart) begin
            pos <= int'(restart_pc); csec <= int'(restart_sec);
            attempt <= attempt + 1; rollbacks <= rollbacks + 1;
            st <= C_RUN;
          end else if (task_done) begin
            tasks_done <= tasks_done + 1;
            if (tid == N_TASKS) begin st <= C_FIN; done <= 1; end
            else begin tid <= tid + 1; st <= C_IDLE; end
          end
        end
        default: ;
      endcase
    end
  end

endmodule
