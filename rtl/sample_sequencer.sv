// sample_sequencer: runs the stored input samples through the SCM and sends
// every model output to the host over the UART.
//
// After start, samples 0 .. n_samples-1 are read from the input buffer one at
// a time. Each is issued to the model core (in_valid for one cycle); when the
// core's out_valid returns, the 32-bit Q7.25 output is shown on res_valid /
// res_y for one cycle and sent as four UART bytes, least significant byte
// first. The next sample is issued only when the last byte has been accepted,
// so the slow serial link stalls the sequence; the core itself could take a
// new sample every cycle. done pulses after the last byte.
//
// This ordering (one sample in flight, bytes LSB first) is this design's
// choice; the paper states only that inputs are held on the FPGA and the
// outputs reach the PC by UART.
//
// Timing: raddr is presented in state S_READ, the buffer's data arrives one
// cycle later (S_ISSUE) and is passed straight to the core with in_valid.
module sample_sequencer
  import scm_pkg::*;
#(
  parameter int AW = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] n_samples,
  output logic          busy,
  output logic          done,
  // input buffer read address
  output logic [AW-1:0] raddr,
  // model core
  output logic          core_in_valid,
  input  logic          core_out_valid,
  input  fx_t           core_out_y,
  // result port
  output logic          res_valid,
  output fx_t           res_y,
  // UART transmitter
  output logic          tx_valid,
  output logic [7:0]    tx_data,
  input  logic          tx_ready,
  // event counters for observation
  output logic [31:0]   stall_cycles
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_ISSUE, S_WAIT, S_SEND, S_DONE} state_e;

  state_e       st;
  logic [AW-1:0] idx;
  fx_t          y_q;
  logic [1:0]   byte_i;

  assign busy          = (st != S_IDLE);
  assign raddr         = idx;
  assign core_in_valid = (st == S_ISSUE);
  assign tx_valid      = (st == S_SEND);
  assign tx_data       = y_q[8*byte_i +: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      idx          <= '0;
      y_q          <= '0;
      byte_i       <= '0;
      done         <= 1'b0;
      res_valid    <= 1'b0;
      res_y        <= '0;
      stall_cycles <= '0;
    end else begin
      done      <= 1'b0;
      res_valid <= 1'b0;
      case (st)
        S_IDLE:  if (start && n_samples != '0) begin
                   idx <= '0;
                   st  <= S_READ;
                 end
        S_READ:  st <= S_ISSUE;
        S_ISSUE: st <= S_WAIT;
        S_WAIT:  if (core_out_valid) begin
                   y_q       <= core_out_y;
                   res_y     <= core_out_y;
                   res_valid <= 1'b1;
                   byte_i    <= '0;
                   st        <= S_SEND;
                 end
        S_SEND:  if (tx_ready) begin
                   byte_i <= byte_i + 2'd1;
                   if (byte_i == 2'd3) begin
                     if (idx == n_samples - 1'b1) st <= S_DONE;
                     else begin
                       idx <= idx + 1'b1;
                       st  <= S_READ;
                     end
                   end
                 end else begin
                   stall_cycles <= stall_cycles + 1;
                 end
        default: begin                      // S_DONE
                   done <= 1'b1;
                   st   <= S_IDLE;
                 end
      endcase
    end
  end

endmodule
