// buffer_shuffler: the buffer shuffler (BS), an N x N crossbar placed between
// the input ports I1..IN and the input buffers IB1..IBN.
//
// The select of port k is the control-unit state Z_k: flits arriving at port k
// are written into buffer IB(Z_k). Normally Z_k = k and every port feeds its
// own buffer; after a Trojan is detected the CU moves Z_k to another buffer.
// What the paper leaves open, and this design adds:
//  - Packet integrity: Z is only looked at when a head flit is accepted. A
//    buffer then stays locked to that port until the tail flit passes, so a
//    packet is never split between two buffers and never interleaved with
//    another one inside a buffer.
//  - Sharing: when two ports target the same free buffer in the same cycle,
//    the buffer's own port wins, otherwise the lowest port number; the loser
//    sees in_ready = 0 and holds its flit (valid/ready flow control).
// Combinational datapath; the lock registers update on the clock edge of an
// accepted head (set) or tail (clear) flit.
module buffer_shuffler
  import sefar_pkg::*;
#(
  parameter int N = NUM_PORTS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  port_idx_t [N-1:0]  z,          // CU outputs, one per input port
  // input ports
  input  logic      [N-1:0]  in_valid,
  input  flit_t     [N-1:0]  in_flit,
  output logic      [N-1:0]  in_ready,
  // buffer write ports
  output logic      [N-1:0]  buf_valid,
  output flit_t     [N-1:0]  buf_flit,
  input  logic      [N-1:0]  buf_ready
);

  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]         locked;      // buffer j is in the middle of a packet
  logic [N-1:0][IW-1:0] owner;       // port that owns buffer j while locked

  logic [N-1:0][IW-1:0] target;      // buffer port i writes into
  logic [N-1:0]         port_locked; // port i is in the middle of a packet
  logic [N-1:0][IW-1:0] src;         // port granted to buffer j
  logic [N-1:0]         src_ok;

  always_comb begin
    // Where does each port write?
    for (int i = 0; i < N; i++) begin
      port_locked[i] = 1'b0;
      target[i]      = IW'(port_pos(z[i]));
      for (int j = 0; j < N; j++)
        if (locked[j] && int'(owner[j]) == i) begin
          port_locked[i] = 1'b1;
          target[i]      = IW'(j);
        end
    end
    // Which port gets each buffer?
    for (int j = 0; j < N; j++) begin
      src[j]    = '0;
      src_ok[j] = 1'b0;
      if (locked[j]) begin
        src[j]    = owner[j];
        src_ok[j] = in_valid[owner[j]];
      end else begin
        for (int i = N - 1; i >= 0; i--)
          if (in_valid[i] && !port_locked[i] && int'(target[i]) == j) begin
            src[j]    = IW'(i);
            src_ok[j] = 1'b1;
          end
        if (in_valid[j] && !port_locked[j] && int'(target[j]) == j) begin
          src[j]    = IW'(j);
          src_ok[j] = 1'b1;
        end
      end
      buf_valid[j] = src_ok[j];
      buf_flit[j]  = in_flit[src[j]];
    end
    for (int i = 0; i < N; i++)
      in_ready[i] = src_ok[target[i]] && int'(src[target[i]]) == i
                    && buf_ready[target[i]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= '0;
      owner  <= '0;
    end else begin
      for (int j = 0; j < N; j++)
        if (buf_valid[j] && buf_ready[j]) begin
          if (buf_flit[j].tail)      locked[j] <= 1'b0;
          else if (buf_flit[j].head) begin
            locked[j] <= 1'b1;
            owner[j]  <= src[j];
          end
        end
    end
  end

endmodule
