// sailor_mem_model: behavioural memory for the SAILOR testbenches.
//
// Not synthesizable and not part of the design: a word-addressed array with
// an instruction port and a data port that follow the core's memory
// protocol (request accepted on valid && ready, one rvalid response per
// request after 1..MAX_LAT cycles). With STALL set, ready is withheld at
// random to exercise the core's wait handling. Stores honour the byte
// enables. Testbenches fill and inspect `mem` hierarchically.
module sailor_mem_model
  import sailor_pkg::*;
#(
  parameter int unsigned WORDS   = 16384,
  parameter int unsigned MAX_LAT = 3,
  parameter bit          STALL   = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t ireq,
  output mem_rsp_t irsp,
  input  mem_req_t dreq,
  output mem_rsp_t drsp
);
  logic [31:0] mem [WORDS];
  int unsigned istall_cnt = 0, dstall_cnt = 0;

  int          ilat = 0, dlat = 0;
  logic [31:0] idata, ddata;
  logic        iready, dready;

  always_ff @(posedge clk) begin
    iready <= !STALL || ($urandom_range(0, 3) != 0);
    dready <= !STALL || ($urandom_range(0, 3) != 0);
  end

  always_comb begin
    irsp = '0; drsp = '0;
    irsp.ready  = (ilat == 0) && iready;
    drsp.ready  = (dlat == 0) && dready;
    irsp.rvalid = (ilat == 1);
    drsp.rvalid = (dlat == 1);
    irsp.rdata  = idata;
    drsp.rdata  = ddata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ilat <= 0; dlat <= 0;
    end else begin
      if (ilat > 0) ilat <= ilat - 1;
      if (dlat > 0) dlat <= dlat - 1;
      if (ireq.valid && !irsp.ready) istall_cnt <= istall_cnt + 1;
      if (dreq.valid && !drsp.ready) dstall_cnt <= dstall_cnt + 1;
      if (ireq.valid && irsp.ready) begin
        idata <= mem[(ireq.addr >> 2) % WORDS];
        ilat  <= 1 + int'($urandom_range(0, MAX_LAT - 1));
      end
      if (dreq.valid && drsp.ready) begin
        int unsigned wi;
        wi = (dreq.addr >> 2) % WORDS;
        ddata <= mem[wi];
        if (dreq.we)
          for (int b = 0; b < 4; b++) if (dreq.be[b]) mem[wi][8*b +: 8] <= dreq.wdata[8*b +: 8];
        dlat <= 1 + int'($urandom_range(0, MAX_LAT - 1));
      end
    end
  end
endmodule
