// cfi_queue_ctrl: decides, every cycle, which commit ports may retire and
// what is pushed into the CFI queue.
//
// Inputs are the filter hits of the entries offered by the commit ports
// (before they retire), the queue's full flag and the per-port "retires a
// CF instruction now" signals from the V block. Outputs:
//   * wait_o[i]: inhibit commit port i. Port 0 is held when it carries a
//     CF instruction and the queue is full. Port 1 is held when it carries a
//     CF instruction and either the queue is full or port 0 also carries one,
//     because the queue takes a single log per cycle. The held instruction
//     retires in a later cycle (CVA6 retries it on port 0).
//   * push_o: a CF instruction retires in this cycle.
//   * select_o: which port's log is pushed (0: port 0, 1: port 1).
//
// Combinational. The two stall conditions follow the paper; the per-port
// granularity of the inhibit (port 0 keeps retiring when only port 1 must
// wait) is this design's choice.
module cfi_queue_ctrl (
  input  logic [1:0] hit_i,     // filter hit on commit port 0/1
  input  logic [1:0] retire_i,  // CF instruction on port 0/1 retires now
  input  logic       full_i,    // CFI queue is full
  output logic [1:0] wait_o,    // inhibit commit port 0/1
  output logic       push_o,
  output logic       select_o
);

  always_comb begin
    wait_o[0] = hit_i[0] && full_i;
    wait_o[1] = hit_i[1] && (full_i || hit_i[0]);
    push_o    = |retire_i;
    select_o  = !retire_i[0];
  end

endmodule
