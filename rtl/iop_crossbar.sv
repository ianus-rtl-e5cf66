// iop_crossbar: the message switch of the Input/Output Processor (IOP).
//
// Every simulation processor has one link to the IOP, and so does the host
// interface. The switch connects any of its NP ports to any other: SP to SP
// for long-range traffic, host to SP for loading and control, SP to host for
// results. A message is a msg_t plus a destination port number on the way
// in, and the source port number on the way out.
//
// Each output has one register stage and its own round-robin arbiter. In a
// cycle where the output register is free, or is being emptied, the arbiter
// grants the first requesting input after the one it granted last. The
// granted input sees in_ready and its message shows on the output the next
// cycle. An input waiting for an output does not block any other output.
// Messages from one input to one output are delivered in order. A message
// for a port number >= NP is never accepted (an assertion reports it).
//
// The paper names the IOP as a cross-bar switch between the 16 SP links and
// the host. The port count is 16 + 1 as in the paper. The message format,
// the valid/ready handshake, the output registers and round-robin
// arbitration are this design's own. The links to other boards are not
// built.
module iop_crossbar
  import ianus_pkg::*;
#(
  parameter int unsigned NP   = 17,
  parameter int unsigned ID_W = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NP-1:0]   in_valid,
  input  logic [ID_W-1:0] in_dest  [NP],
  input  msg_t            in_msg   [NP],
  output logic [NP-1:0]   in_ready,
  output logic [NP-1:0]   out_valid,
  output logic [ID_W-1:0] out_src  [NP],
  output msg_t            out_msg  [NP],
  input  logic [NP-1:0]   out_ready
);

  localparam int unsigned PW = (NP > 1) ? $clog2(NP) : 1;

  logic [PW-1:0] last [NP];        // last input granted, per output
  logic [NP-1:0] grant [NP];       // [output][input]
  logic [NP-1:0] free;

  // Round-robin pick: among requesting inputs, the one that comes first
  // when counting upwards from the input after lst.
  function automatic logic [NP-1:0] rr_pick(input logic [NP-1:0] req,
                                            input logic [PW-1:0] lst);
    logic [NP-1:0] g;
    g = '0;
    for (int k = NP; k >= 1; k--)
      if (req[(32'(lst) + k) % NP]) g = NP'(1) << ((32'(lst) + k) % NP);
    return g;
  endfunction

  for (genvar o = 0; o < NP; o++) begin : g_out
    logic [NP-1:0] req;
    always_comb begin
      for (int i = 0; i < NP; i++) req[i] = in_valid[i] && (32'(in_dest[i]) == o);
      free[o]  = !out_valid[o] || out_ready[o];
      grant[o] = free[o] ? rr_pick(req, last[o]) : '0;
    end
  end

  always_comb begin
    in_ready = '0;
    for (int i = 0; i < NP; i++)
      for (int o = 0; o < NP; o++) in_ready[i] = in_ready[i] | grant[o][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      for (int o = 0; o < NP; o++) begin
        last[o]    <= PW'(NP - 1);
        out_src[o] <= '0;
        out_msg[o] <= '{op: OP_NOP, addr: '0, data: '0};
      end
    end else begin
      for (int o = 0; o < NP; o++) begin
        if (out_valid[o] && out_ready[o]) out_valid[o] <= 1'b0;
        for (int i = 0; i < NP; i++) begin
          if (grant[o][i]) begin
            out_valid[o] <= 1'b1;
            out_src[o]   <= ID_W'(i);
            out_msg[o]   <= in_msg[i];
            last[o]      <= PW'(i);
          end
        end
      end
    end
  end

  for (genvar i = 0; i < NP; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     in_valid[i] |-> 32'(in_dest[i]) < NP)
      else $error("port %0d sends to non-existent port %0d", i, in_dest[i]);
    // Valid/ready: a waiting message must stay put until accepted.
    assert property (@(posedge clk) disable iff (!rst_n)
                     in_valid[i] && !in_ready[i] |=> in_valid[i] && $stable(in_dest[i]))
      else $error("port %0d withdrew or changed a waiting message", i);
  end

endmodule
