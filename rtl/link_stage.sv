// link_stage: one directed inter-router link with its link-traversal
// register, including the effect of a permanent link fault.
//
// A two-entry FIFO: in_ready depends only on the stored count and out_valid
// only on the FIFO not being empty, so chaining routers through link stages
// creates no combinational path from a router's output back into itself.
// A flit accepted in one cycle can leave in the next. When `faulty` is high
// the link is broken: every flit offered is accepted and lost (this is what
// makes a router that forwards onto a faulty link a packet-drop router), and
// `drop` pulses for each lost flit. Link traversal is one of the paper's five
// router pipeline stages; the two-entry buffering is this design's choice.
module link_stage
  import sefar_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  faulty,
  input  logic  in_valid,
  input  flit_t in_flit,
  output logic  in_ready,
  output logic  out_valid,
  output flit_t out_flit,
  input  logic  out_ready,
  output logic  drop
);

  flit_t      q [2];
  logic       rd_ptr, wr_ptr;
  logic [1:0] count;
  logic       push, pop;

  always_comb begin
    in_ready  = faulty || count != 2'd2;
    out_valid = count != 2'd0;
    out_flit  = q[rd_ptr];
    push      = in_valid && in_ready && !faulty;
    pop       = out_valid && out_ready;
    drop      = in_valid && faulty;
  end

  always_ff @(posedge clk) begin
    if (push) q[wr_ptr] <= in_flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= 1'b0;
      wr_ptr <= 1'b0;
      count  <= 2'd0;
    end else begin
      if (push) wr_ptr <= ~wr_ptr;
      if (pop)  rd_ptr <= ~rd_ptr;
      count <= count + 2'(push) - 2'(pop);
    end
  end

endmodule
