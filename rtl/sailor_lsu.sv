// sailor_lsu: load/store unit with the shared 32-bit buffer register.
//
// Memory access: a start pulse with we, size (funct3[1:0]: byte, half, word),
// uns (funct3[2], zero-extend loads), the byte address and the store value
// issues one request on the 32-bit D-memory port. The address is word
// aligned on the port; byte enables and a replicated store value select the
// bytes. The read word is captured in the buffer register when rvalid
// arrives; in the following cycle done is high and load_val holds the
// selected, sign- or zero-extended value. misaligned is a combinational check
// of addr/size that the core evaluates before starting (no request is issued
// for a misaligned access).
//
// AES support (Fig. 4 of the paper): the same buffer register assembles the
// 32-bit AES result byte by byte. aes_push shifts it right by one byte and
// puts aes_byte into bits 31:24; buf_o[7:0] feeds the xt2 unit and buf_o
// is loaded back into serializer 1. Reusing the register saves an auxiliary
// register, as the paper describes; push direction and byte order are this
// design's choices.
//
// Timing: start (idle only) -> request held until ready -> wait for rvalid
// -> done for one cycle. A store completes the same way on its rvalid.
module sailor_lsu
  import sailor_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        we,
  input  logic [1:0]  size,
  input  logic        uns,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        busy,
  output logic        done,
  output logic [31:0] load_val,
  output logic        misaligned,
  output mem_req_t    dreq,
  input  mem_rsp_t    drsp,
  input  logic        aes_push,
  input  logic [7:0]  aes_byte,
  output logic [31:0] buf_o
);
  typedef enum logic [1:0] {L_IDLE, L_REQ, L_WAIT, L_DONE} lstate_e;
  lstate_e     st;
  logic [31:0] buf_q;
  mem_req_t    req_q;
  logic [1:0]  off_q, size_q;
  logic        uns_q;

  assign misaligned = (size == 2'd1 && addr[0]) || (size == 2'd2 && addr[1:0] != 2'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; buf_q <= '0; req_q <= '0; off_q <= '0; size_q <= '0; uns_q <= 1'b0;
    end else begin
      case (st)
        L_IDLE: if (start) begin
          st           <= L_REQ;
          req_q.valid  <= 1'b1;
          req_q.we     <= we;
          req_q.addr   <= {addr[31:2], 2'b00};
          case (size)
            2'd0:    begin req_q.be <= 4'b0001 << addr[1:0]; req_q.wdata <= {4{wdata[7:0]}}; end
            2'd1:    begin req_q.be <= addr[1] ? 4'b1100 : 4'b0011; req_q.wdata <= {2{wdata[15:0]}}; end
            default: begin req_q.be <= 4'b1111; req_q.wdata <= wdata; end
          endcase
          off_q <= addr[1:0]; size_q <= size; uns_q <= uns;
        end
        L_REQ: if (drsp.ready) begin
          req_q.valid <= 1'b0;
          st <= drsp.rvalid ? L_DONE : L_WAIT;
          if (drsp.rvalid && !req_q.we) buf_q <= drsp.rdata;
        end
        L_WAIT: if (drsp.rvalid) begin
          st <= L_DONE;
          if (!req_q.we) buf_q <= drsp.rdata;
        end
        default: st <= L_IDLE;  // L_DONE
      endcase
      if (aes_push) buf_q <= {aes_byte, buf_q[31:8]};
    end
  end

  always_comb begin
    logic [31:0] sh;
    sh = buf_q >> (8 * off_q);
    case (size_q)
      2'd0:    load_val = uns_q ? {24'd0, sh[7:0]}  : {{24{sh[7]}}, sh[7:0]};
      2'd1:    load_val = uns_q ? {16'd0, sh[15:0]} : {{16{sh[15]}}, sh[15:0]};
      default: load_val = buf_q;
    endcase
  end

  assign dreq  = req_q;
  assign busy  = (st != L_IDLE);
  assign done  = (st == L_DONE);
  assign buf_o = buf_q;

  // request stays stable until accepted
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dreq.valid && !drsp.ready |=> dreq.valid && $stable(dreq.addr));
endmodule
