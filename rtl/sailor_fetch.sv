// sailor_fetch: instruction fetch with a one-entry fetch buffer.
//
// While the core executes one instruction (which takes several cycles on a
// serialized data path) this unit fetches the succeeding instruction into a
// buffer, so that the next instruction's control signals and operands can
// be loaded as soon as the current one finishes. Prediction is plain
// fall-through: after each fetch the fetch address advances by 4 (word-aligned
// instructions). When the core takes a branch, jump or trap it raises
// redirect with the new pc: the buffer is emptied and a request still in
// flight is allowed to complete (the port protocol keeps requests stable
// until accepted) but its response is dropped.
//
// Interface: ibuf_valid/ibuf_instr/ibuf_pc present the buffered instruction;
// consume empties the buffer (the core has taken it). A new fetch starts
// when the buffer is empty and nothing is in flight. Memory port protocol as
// in sailor_pkg.
//
// The paper describes the fetch buffer and a forward (fall-through)
// prediction for word-aligned instructions; the drop-on-redirect mechanism
// and the port handshake are this design's choices.
module sailor_fetch
  import sailor_pkg::*;
#(
  parameter logic [31:0] BOOT_ADDR = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  output mem_req_t    ireq,
  input  mem_rsp_t    irsp,
  output logic        ibuf_valid,
  output logic [31:0] ibuf_instr,
  output logic [31:0] ibuf_pc,
  input  logic        consume,
  input  logic        redirect,
  input  logic [31:0] redirect_pc,
  output logic        drop_event   // a stale response was discarded
);
  logic [31:0] fpc_q, raddr_q, ibuf_q, ibpc_q;
  logic        req_q, pend_q, drop_q, ibv_q;
  logic        accept, resp, outstanding_next;

  assign accept = req_q && irsp.ready;
  assign resp   = (pend_q || accept) && irsp.rvalid;
  // something stays in flight after this cycle
  assign outstanding_next = (req_q && !accept) || ((pend_q || accept) && !irsp.rvalid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fpc_q <= BOOT_ADDR; raddr_q <= '0; ibuf_q <= '0; ibpc_q <= '0;
      req_q <= 1'b0; pend_q <= 1'b0; drop_q <= 1'b0; ibv_q <= 1'b0;
    end else begin
      if (accept) begin
        req_q  <= 1'b0;
        pend_q <= !irsp.rvalid;
      end else if (pend_q && irsp.rvalid) begin
        pend_q <= 1'b0;
      end

      if (resp) begin
        if (!drop_q && !redirect) begin
          ibuf_q <= irsp.rdata;
          ibpc_q <= raddr_q;
          ibv_q  <= 1'b1;
        end
        drop_q <= 1'b0;
      end

      if (consume && !resp) ibv_q <= 1'b0;

      if (redirect) begin
        ibv_q <= 1'b0;
        fpc_q <= redirect_pc;
        drop_q <= outstanding_next;
      end else if (!req_q && !pend_q && (!ibv_q || consume) && !drop_q) begin
        // start the next sequential fetch (also while the buffer is being consumed)
        req_q   <= 1'b1;
        raddr_q <= fpc_q;
        fpc_q   <= fpc_q + 32'd4;
      end
    end
  end

  always_comb begin
    ireq       = '0;
    ireq.valid = req_q;
    ireq.addr  = raddr_q;
    ireq.be    = 4'b1111;
  end
  assign ibuf_valid = ibv_q;
  assign ibuf_instr = ibuf_q;
  assign ibuf_pc    = ibpc_q;
  assign drop_event = resp && (drop_q || redirect);

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ireq.valid && !irsp.ready |=> ireq.valid && $stable(ireq.addr));
endmodule
