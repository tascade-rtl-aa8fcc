// pu_model: behavioural stand-in for a tile's processing unit, for the
// system testbenches only (the PU is a general core outside this RTL).
//
// It runs the two reduction tasks of the examples:
//   proxy task (channel PROXY_CH, T3'):  old = P-cache[idx] (default on a miss);
//       min: if val < old then P-cache[idx] = val   (else the update is filtered)
//       add: P-cache[idx] = old + val
//   owner task (channel OWNER_CH, T3):   mem[idx mod CHUNK] = min(mem, val) or mem + val
// mem is the owner's chunk of the reduction array, shown on an output so the
// testbench can compare it. A task takes a few cycles: accept, P-cache read,
// P-cache write, wait for the write to finish, done.
module pu_model
  import tascade_pkg::*;
#(
  parameter int unsigned CHUNK    = 4,
  parameter int unsigned PROXY_CH = 0,
  parameter int unsigned OWNER_CH = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   op_add,        // 0: min, 1: add
  input  data_t                  mem_init,      // owner array initial value
  input  logic                   mem_clear,
  input  logic                   task_valid,
  input  msg_t                   task_msg,
  output logic                   task_ready,
  output logic                   task_done,
  output logic                   pc_req_valid,
  input  logic                   pc_req_ready,
  output logic                   pc_req_we,
  output idx_t                   pc_req_idx,
  output data_t                  pc_req_wdata,
  input  logic                   pc_rsp_valid,
  input  data_t                  pc_rsp_data,
  output data_t [CHUNK-1:0]      mem,
  output int                     n_filtered,
  output int                     n_proxy_tasks,
  output int                     n_owner_tasks
);

  typedef enum logic [2:0] {IDLE, RD, RD_WAIT, WR, WR_WAIT, DONE} st_e;
  st_e  st;
  msg_t cur;

  assign task_ready = (st == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; cur <= '0; task_done <= 1'b0;
      pc_req_valid <= 1'b0; pc_req_we <= 1'b0; pc_req_idx <= '0; pc_req_wdata <= '0;
      n_filtered <= 0; n_proxy_tasks <= 0; n_owner_tasks <= 0;
      for (int i = 0; i < int'(CHUNK); i++) mem[i] <= mem_init;
    end else begin
      task_done <= 1'b0;
      if (mem_clear) for (int i = 0; i < int'(CHUNK); i++) mem[i] <= mem_init;
      case (st)
        IDLE: if (task_valid) begin
          cur <= task_msg;
          if (32'(task_msg.chan) == PROXY_CH) begin
            st <= RD;
            n_proxy_tasks <= n_proxy_tasks + 1;
          end else begin
            int o;
            o = int'(task_msg.idx % CHUNK);
            if (32'(task_msg.chan) == OWNER_CH) begin
              mem[o] <= op_add ? mem[o] + task_msg.val
                               : (task_msg.val < mem[o] ? task_msg.val : mem[o]);
              n_owner_tasks <= n_owner_tasks + 1;
            end
            st <= DONE;
          end
        end
        RD: if (pc_req_ready) begin
          pc_req_valid <= 1'b1; pc_req_we <= 1'b0; pc_req_idx <= cur.idx;
          st <= RD_WAIT;
        end
        RD_WAIT: begin
          pc_req_valid <= 1'b0;
          if (pc_rsp_valid) begin
            if (op_add || cur.val < pc_rsp_data) begin
              pc_req_wdata <= op_add ? pc_rsp_data + cur.val : cur.val;
              st <= WR;
            end else begin
              n_filtered <= n_filtered + 1;
              st <= DONE;
            end
          end
        end
        WR: if (pc_req_ready) begin
          pc_req_valid <= 1'b1; pc_req_we <= 1'b1;
          st <= WR_WAIT;
        end
        WR_WAIT: begin
          pc_req_valid <= 1'b0;
          if (pc_req_ready && !pc_req_valid) st <= DONE;
        end
        DONE: begin
          task_done <= 1'b1;
          st <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
