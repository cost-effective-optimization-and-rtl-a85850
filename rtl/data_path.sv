// data_path: ciphertext input and plaintext output of the accelerator.
//
// Two small FIFOs decouple the outside world from the pipeline: ciphertexts
// enter through a valid/ready port and wait in the input FIFO until the
// control unit takes one at a pipeline step; finished plaintexts are written
// into the output FIFO by the control unit and leave through a valid/ready
// port. The paper only says the data path carries c in and m out under the
// control unit's read/write control; the FIFOs, their depth and the
// handshakes are this design's choices.
//
// Timing: a transfer happens on a clock edge where valid and ready are both
// high. in_pop/out_push come from the control unit.
module data_path #(
  parameter int unsigned N     = 2048,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  // external ciphertext stream
  input  logic         c_valid,
  output logic         c_ready,
  input  logic [2*N-1:0] c_data,
  // external plaintext stream
  output logic         m_valid,
  input  logic         m_ready,
  output logic [N-1:0] m_data,
  // control side
  output logic         in_avail,
  input  logic         in_pop,
  output logic [2*N-1:0] in_data,
  output logic         out_full,
  input  logic         out_push,
  input  logic [N-1:0] out_data
);
  logic in_full, in_empty, out_empty;

  sync_fifo #(.W(2*N), .DEPTH(DEPTH)) u_in (
    .clk, .rst_n, .push(c_valid && !in_full), .din(c_data), .full(in_full),
    .pop(in_pop), .dout(in_data), .empty(in_empty));

  sync_fifo #(.W(N), .DEPTH(DEPTH)) u_out (
    .clk, .rst_n, .push(out_push), .din(out_data), .full(out_full),
    .pop(m_ready && !out_empty), .dout(m_data), .empty(out_empty));

  assign c_ready  = !in_full;
  assign in_avail = !in_empty;
  assign m_valid  = !out_empty;
endmodule
