// pa_unit: pre-allocation unit of one GPM.
//
// The distribution engine hands a GPM its batches through this unit. Jobs
// wait in a FIFO of DEPTH entries and are served strictly in arrival order,
// which is batch-ID order, as the paper requires when several batches are
// queued for one GPM. For each job:
//   1. if prealloc or dup is set, one copy request per texture line,
//      tex_addr .. tex_addr+tex_lines-1, is issued to the memory system (one
//      per cycle at most, valid/ready) so the data lands in this GPM's local
//      DRAM before rendering starts;
//   2. unless dup is set, the batch is launched on the GPM (valid/ready).
// A dup job (duplication for fine-grained leftover work) copies data only.
// Calibration batches arrive with prealloc = 0 (first-touch placement) and
// are launched at once. A job with n lines to copy occupies the unit for
// n + 2 cycles at full rate: one cycle to take the job from the queue, n
// copy beats, then the launch beat.
// The request format and the memory system behind it are this design's
// choice; the paper says only that the unit pre-allocates the batch's data.
// copy_gpm is the constant GPM_ID (the DRAM the copy must reach), so it is an
// output without logic behind it; it lets a memory system route the requests.
module pa_unit
  import oovr_pkg::*;
#(
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned GPM_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              job_valid,
  output logic              job_ready,
  input  pa_job_t           job,
  output logic              copy_valid,
  input  logic              copy_ready,
  output logic [ADDR_W-1:0] copy_addr,
  output logic [7:0]        copy_gpm,      // destination GPM of the copy
  output logic              launch_valid,
  input  logic              launch_ready,
  output batch_desc_t       launch_desc,
  output logic              empty,         // no job queued or in progress
  output logic [$clog2(DEPTH+1)-1:0] pending
);
  pa_job_t head;
  logic    head_valid, head_pop;

  stream_fifo #(.T(pa_job_t), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(job_valid), .in_ready(job_ready), .in_data(job),
    .out_valid(head_valid), .out_ready(head_pop), .out_data(head),
    .count(pending)
  );

  typedef enum logic [1:0] {S_IDLE, S_COPY, S_LAUNCH} state_e;
  state_e state;
  logic [LEN_W-1:0] line;

  wire needs_copy = (head.prealloc || head.dup) && (head.desc.tex_lines != 0);

  assign copy_valid   = (state == S_COPY);
  assign copy_addr    = head.desc.tex_addr + ADDR_W'(line);
  assign copy_gpm     = 8'(GPM_ID);
  assign launch_valid = (state == S_LAUNCH);
  assign launch_desc  = head.desc;
  assign empty        = !head_valid;

  always_comb begin
    head_pop = 1'b0;
    unique case (state)
      S_IDLE:   head_pop = head_valid && !needs_copy && head.dup;
      S_COPY:   head_pop = copy_ready && (line == head.desc.tex_lines - 1'b1) && head.dup;
      S_LAUNCH: head_pop = launch_ready;
      default:  head_pop = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      line  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (head_valid) begin
          line <= '0;
          if (needs_copy)     state <= S_COPY;
          else if (!head.dup) state <= S_LAUNCH;
        end
        S_COPY: if (copy_ready) begin
          if (line == head.desc.tex_lines - 1'b1) begin
            line  <= '0;
            state <= head.dup ? S_IDLE : S_LAUNCH;
          end else begin
            line <= line + 1'b1;
          end
        end
        S_LAUNCH: if (launch_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_copy_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                     copy_valid && !copy_ready |=> copy_valid && $stable(copy_addr));
  a_launch_stable: assert property (@(posedge clk) disable iff (!rst_n)
                     launch_valid && !launch_ready |=> launch_valid && $stable(launch_desc));
`endif
endmodule
