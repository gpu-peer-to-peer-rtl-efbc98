// buf_list: the list of registered receive buffers (BUF_LIST).
//
// A buffer, host or GPU, is registered with its 64-bit virtual start address,
// its length and the owning process ID, plus whether it lives in GPU memory
// and on which GPU. An incoming packet is accepted only if its destination
// range [va, va+len) lies inside a registered buffer of the same process; the
// matching entry also tells the RX path whether to write host or GPU memory.
//
// The lookup walks the list linearly, one entry per clock cycle, and stops at
// the first match, so a lookup takes (index of the match + 1) cycles, or
// N_ENTRIES cycles for a miss. Registration writes one entry at a time
// through the reg_* port (driven by the firmware) and may happen between
// lookups.
//
// Interface: lk_valid/lk_ready request; lk_done pulses for one cycle with
// lk_hit, lk_is_gpu and lk_gpu. From the source design: the list itself, its
// linear traversal, the host/GPU distinction and identification of a buffer
// by virtual address and process ID. The entry layout, the list size and the
// hardware (rather than firmware) traversal are this design's.
module buf_list
  import apenet_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 64,
  parameter int unsigned N_GPU     = 1,
  localparam int unsigned IW = (N_ENTRIES > 1) ? $clog2(N_ENTRIES) : 1,
  localparam int unsigned GW = (N_GPU > 1) ? $clog2(N_GPU) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // registration port
  input  logic             reg_we,
  input  logic [IW-1:0]    reg_idx,
  input  logic             reg_valid,     // 0 deregisters the entry
  input  logic [VA_W-1:0]  reg_va,
  input  logic [31:0]      reg_len,
  input  logic [PID_W-1:0] reg_pid,
  input  logic             reg_is_gpu,
  input  logic [GW-1:0]    reg_gpu,
  // lookup
  input  logic             lk_valid,
  output logic             lk_ready,
  input  logic [VA_W-1:0]  lk_va,
  input  logic [LEN_W-1:0] lk_len,
  input  logic [PID_W-1:0] lk_pid,
  output logic             lk_done,
  output logic             lk_hit,
  output logic             lk_is_gpu,
  output logic [GW-1:0]    lk_gpu
);
  typedef struct packed {
    logic             valid;
    logic [VA_W-1:0]  va;
    logic [31:0]      len;
    logic [PID_W-1:0] pid;
    logic             is_gpu;
    logic [GW-1:0]    gpu;
  } entry_t;

  entry_t           tbl [N_ENTRIES];
  logic             busy_q;
  logic [IW-1:0]    idx_q;
  logic [VA_W-1:0]  va_q;
  logic [LEN_W-1:0] len_q;
  logic [PID_W-1:0] pid_q;
  entry_t           cur;
  logic             match, at_end;

  assign lk_ready = !busy_q;
  assign cur      = tbl[idx_q];
  // inside [base, base+len), computed without overflow
  assign match    = cur.valid && (cur.pid == pid_q) && (va_q >= cur.va) &&
                    ((va_q - cur.va) + VA_W'(len_q) <= VA_W'(cur.len));
  assign at_end   = (idx_q == IW'(N_ENTRIES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ENTRIES; i++) tbl[i] <= '0;
    end else if (reg_we) begin
      tbl[reg_idx] <= '{valid: reg_valid, va: reg_va, len: reg_len, pid: reg_pid,
                        is_gpu: reg_is_gpu, gpu: reg_gpu};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q    <= 1'b0;
      idx_q     <= '0;
      va_q      <= '0;
      len_q     <= '0;
      pid_q     <= '0;
      lk_done   <= 1'b0;
      lk_hit    <= 1'b0;
      lk_is_gpu <= 1'b0;
      lk_gpu    <= '0;
    end else begin
      lk_done <= 1'b0;
      if (!busy_q) begin
        if (lk_valid) begin
          busy_q <= 1'b1;
          idx_q  <= '0;
          va_q   <= lk_va;
          len_q  <= lk_len;
          pid_q  <= lk_pid;
        end
      end else if (match || at_end) begin
        busy_q    <= 1'b0;
        lk_done   <= 1'b1;
        lk_hit    <= match;
        lk_is_gpu <= match && cur.is_gpu;
        lk_gpu    <= cur.gpu;
      end else begin
        idx_q <= idx_q + 1'b1;
      end
    end
  end
endmodule
