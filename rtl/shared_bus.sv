// Shared bus of a tile, connecting the centralized memories to the IMAs.
//
// Input path (IN_W wires, 256 in the paper): one word per cycle from the
// centralized input memory into the local input buffer of the IMA in_dest.
// Output path (OUT_W wires, 128 in the paper): one read per cycle of the
// local output buffer of IMA out_src at out_addr; the word returns on
// out_rdata with out_rvalid one cycle later (the buffer's read latency).
// The paper gives the widths only; the addressed one-transfer-per-cycle
// protocol is this design's choice, with the tile controller as sole master.
// Address and data wires are shared by all IMAs, so ib_waddr, ib_wdata and
// ob_raddr are the master's signals passed on unchanged; only the enables
// are decoded per IMA and the returning words selected.
module shared_bus #(
  parameter int N_IMA  = 8,
  parameter int IN_W   = 256,
  parameter int OUT_W  = 128,
  parameter int IBA_W  = 6,
  parameter int OBA_W  = 4,
  localparam int SEL_W = (N_IMA > 1) ? $clog2(N_IMA) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // input path
  input  logic              in_valid,
  input  logic [SEL_W-1:0]  in_dest,
  input  logic [IBA_W-1:0]  in_addr,
  input  logic [IN_W-1:0]   in_data,
  output logic [N_IMA-1:0]  ib_we,
  output logic [IBA_W-1:0]  ib_waddr,
  output logic [IN_W-1:0]   ib_wdata,
  // output path
  input  logic              out_req,
  input  logic [SEL_W-1:0]  out_src,
  input  logic [OBA_W-1:0]  out_addr,
  output logic [N_IMA-1:0]  ob_re,
  output logic [OBA_W-1:0]  ob_raddr,
  input  logic [OUT_W-1:0]  ob_rdata [N_IMA],
  output logic              out_rvalid,
  output logic [OUT_W-1:0]  out_rdata
);

  logic [SEL_W-1:0] src_q;

  always_comb begin
    for (int m = 0; m < N_IMA; m++) begin
      ib_we[m] = in_valid && (int'(in_dest) == m);
      ob_re[m] = out_req  && (int'(out_src) == m);
    end
  end

  assign ib_waddr  = in_addr;
  assign ib_wdata  = in_data;
  assign ob_raddr  = out_addr;
  assign out_rdata = ob_rdata[src_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_q      <= '0;
      out_rvalid <= 1'b0;
    end else begin
      out_rvalid <= out_req;
      if (out_req) src_q <= out_src;
    end
  end

  a_in_dest:  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> int'(in_dest) < N_IMA);
  a_out_src:  assert property (@(posedge clk) disable iff (!rst_n) out_req  |-> int'(out_src) < N_IMA);

endmodule
