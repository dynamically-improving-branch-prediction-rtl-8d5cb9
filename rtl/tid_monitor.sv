// tid_monitor: turns writes to the ARM software thread ID register into
// context switch events.
//
// The operating system writes a per-thread value into the thread ID register
// when it switches threads; watching those writes tells the framework that a
// switch happened and which thread comes next, without any new instruction.
// The monitor keeps a copy of the register. A write of a value different from
// the copy produces, one clock later, a one-cycle cs_valid pulse with the
// outgoing (cs_prev_pid) and incoming (cs_next_pid) IDs; rewriting the same
// value is not a switch. After reset the running thread is taken to be ID 0.
// Using the register value itself as the process ID, and the one-cycle
// latency, are this design's choices.
module tid_monitor
  import csaf_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic tid_wr_en,
  input  pid_t tid_wr_data,
  output logic cs_valid,
  output pid_t cs_prev_pid,
  output pid_t cs_next_pid,
  output pid_t cur_pid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_pid     <= '0;
      cs_valid    <= 1'b0;
      cs_prev_pid <= '0;
      cs_next_pid <= '0;
    end else begin
      cs_valid <= 1'b0;
      if (tid_wr_en && (tid_wr_data != cur_pid)) begin
        cs_valid    <= 1'b1;
        cs_prev_pid <= cur_pid;
        cs_next_pid <= tid_wr_data;
        cur_pid     <= tid_wr_data;
      end
    end
  end
endmodule
