// tb_axi_mem: behavioural AXI memory for the testbenches (stands in for the L2
// memory of the system around the cluster).  Read bursts are queued and answered
// in order after Latency cycles, one beat per cycle; writes are taken one burst at a
// time with byte strobes and answered with a B response.  Words never written read
// as init_word(address).  reads_o/writes_o count address handshakes.
module tb_axi_mem
  import mempool_pkg::*;
#(
  parameter int Latency = 12
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  req_i,
  output axi_resp_t resp_o,
  output int        reads_o,
  output int        writes_o
);
  logic [AxiDataWidth-1:0] mem [logic [25:0]];

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return a ^ 32'h5EED_0000;
  endfunction

  function automatic logic [AxiDataWidth-1:0] read_beat(input logic [31:0] a);
    logic [AxiDataWidth-1:0] d;
    if (mem.exists(a[31:6])) return mem[a[31:6]];
    for (int k = 0; k < AxiDataWidth / 32; k++) d[32*k +: 32] = init_word({a[31:6], 6'd0} + 4 * k);
    return d;
  endfunction

  axi_ax_t  arq [$];
  int       art [$];
  int       beat, cyc;
  logic     aw_pend, b_pend;
  axi_ax_t  aw_q;
  int       wbeat;
  logic     aw_pend_s, b_pend_s;   // registered copies seen by the outputs (no race with the DUT)
  logic [AxiIdWidth-1:0] b_id_s;
  logic     head_v;     // the oldest read burst is due (mirrors the queue head as plain signals)
  axi_ax_t  head_ax;
  int       head_beat;

  always_comb begin
    resp_o          = '0;
    resp_o.ar_ready = 1'b1;
    resp_o.aw_ready = !aw_pend_s && !b_pend_s;
    resp_o.w_ready  = aw_pend_s;
    resp_o.b_valid  = b_pend_s;
    resp_o.b.id     = b_id_s;
    if (head_v) begin
      resp_o.r_valid = 1'b1;
      resp_o.r.id    = head_ax.id;
      resp_o.r.data  = read_beat(head_ax.addr + 64 * head_beat);
      resp_o.r.last  = head_beat == int'(head_ax.len);
    end
  end

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cyc = 0; beat = 0; aw_pend = 0; b_pend = 0; wbeat = 0; aw_q = '0;
      reads_o = 0; writes_o = 0;
      arq.delete(); art.delete();
      head_v <= 0; head_ax <= '0; head_beat <= 0;
      aw_pend_s <= 0; b_pend_s <= 0; b_id_s <= '0;
    end else begin
      cyc++;
      if (resp_o.r_valid && req_i.r_ready) begin
        if (resp_o.r.last) begin void'(arq.pop_front()); void'(art.pop_front()); beat = 0; end
        else beat++;
      end
      if (req_i.ar_valid) begin
        arq.push_back(req_i.ar); art.push_back(cyc + Latency); reads_o++;
      end
      if (req_i.b_ready && b_pend) b_pend = 0;
      if (req_i.w_valid && aw_pend) begin
        logic [31:0] a;
        logic [AxiDataWidth-1:0] d;
        a = aw_q.addr + 64 * wbeat;
        d = read_beat(a);
        for (int k = 0; k < AxiStrbWidth; k++) if (req_i.w.strb[k]) d[8*k +: 8] = req_i.w.data[8*k +: 8];
        mem[a[31:6]] = d;
        wbeat++;
        if (req_i.w.last) begin aw_pend = 0; b_pend = 1; end
      end
      if (req_i.aw_valid && resp_o.aw_ready) begin
        aw_q = req_i.aw; aw_pend = 1; wbeat = 0; writes_o++;
      end
      head_v    <= arq.size() > 0 && art[0] <= cyc;
      head_ax   <= arq.size() > 0 ? arq[0] : '0;
      head_beat <= beat;
      aw_pend_s <= aw_pend;
      b_pend_s  <= b_pend;
      b_id_s    <= aw_q.id;
    end
  end
endmodule
