// buffer_ctrl: buffer controller (BC) of the network interface.
//
// Schedules the PE between the two DataReceive components first come, first
// served: each time AvReceive_k rises, slot k is appended to a two-entry
// arrival queue (slot 0 first if both rise in the same cycle, a choice of this design).
// When the PE is free (pe_ready) and the queue is not empty, the controller
// steers the MUX to the oldest slot, starts the PE on that packet's
// operands, releases the DataReceive component (take) and remembers where
// the reply goes. When the PE reports done, the result is offered to
// DataSend (rsp_valid until rsp_ready). Two tasks therefore use the PE
// interleaved, one packet at a time.
// The operands go to the PE straight from the MUX output (pe_ops, pe_nops
// are wired to pkt); the receiver keeps them stable until take.
// Timing: start one cycle after the packet's AvReceive is seen at the queue
// head; reply offered the cycle after pe_done.
module buffer_ctrl
  import vnoc_pkg::*;
#(
  parameter logic [3:0] MY_X = 4'd0,
  parameter logic [3:0] MY_Y = 4'd0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [1:0]              av,        // {AvReceive_1, AvReceive_0}
  output logic                    sel,       // MUX select
  input  logic                    q_av,      // AvReceive of the selected slot
  input  pkt_t                    pkt,       // selected Data_in
  output logic [1:0]              take,      // release DR0 / DR1
  input  logic                    pe_ready,
  output logic                    pe_start,
  output flit_t [MAX_OPS-1:0]     pe_ops,
  output logic [1:0]              pe_nops,
  input  logic                    pe_done,
  input  flit_t                   pe_result,
  output logic                    rsp_valid,
  input  logic                    rsp_ready,
  output rsp_t                    rsp,
  output logic                    serving,   // PE working on a packet
  output logic                    serving_slot
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_SEND} bc_e;

  bc_e        state;
  logic [1:0] qn;
  logic       q0, q1;
  logic [1:0] inq;
  logic [1:0] arrive;
  logic       start_now;
  flit_t      r_dst, r_src;
  logic       r_slot;

  assign sel       = q0;
  assign start_now = (state == S_IDLE) && (qn != 2'd0) && q_av && pe_ready;
  assign pe_start  = start_now;
  assign pe_ops    = pkt.ops;
  assign pe_nops   = pkt.nops;
  assign take      = start_now ? (q0 ? 2'b10 : 2'b01) : 2'b00;
  assign arrive    = av & ~inq & ~take;
  assign rsp_valid = (state == S_SEND);
  assign serving   = (state != S_IDLE);
  assign serving_slot = r_slot;

  // arrival queue: pop the head on start, then append new arrivals
  logic [1:0] n_qn, n_inq;
  logic       n_q0, n_q1;
  always_comb begin
    n_qn = qn; n_q0 = q0; n_q1 = q1; n_inq = inq;
    if (start_now) begin
      n_inq[q0] = 1'b0;
      n_q0      = q1;
      n_qn      = qn - 1'b1;
    end
    for (int k = 0; k < 2; k++) begin
      if (arrive[k]) begin
        if (n_qn == 2'd0) n_q0 = 1'(k);
        else              n_q1 = 1'(k);
        n_qn     = n_qn + 1'b1;
        n_inq[k] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      qn     <= '0;
      q0     <= 1'b0;
      q1     <= 1'b0;
      inq    <= '0;
      r_dst  <= '0;
      r_src  <= '0;
      r_slot <= 1'b0;
      rsp    <= '0;
    end else begin
      qn <= n_qn; q0 <= n_q0; q1 <= n_q1; inq <= n_inq;

      case (state)
        S_IDLE: if (start_now) begin
          state  <= S_RUN;
          r_dst  <= pkt.src;
          r_slot <= q0;
          r_src  <= make_hdr(q0, MY_X, MY_Y);
        end
        S_RUN: if (pe_done) begin
          state <= S_SEND;
          rsp   <= '{dst: r_dst, src: r_src, result: pe_result};
        end
        default: if (rsp_ready) state <= S_IDLE;
      endcase
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp));
  a_take_full: assert property (@(posedge clk) disable iff (!rst_n)
    (take != 2'b00) |-> (av & take) == take);

endmodule
