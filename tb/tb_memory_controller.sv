// tb_memory_controller: 2 lanes, V buffer of 4. Checks the per-lane choice
// (lane's next-plane request first, scheduler's sign-plane request
// otherwise), the bit-plane-major address k_base + r*seq_len + j and the tag,
// routing of replies into the K buffer, the Value address v_base + j, and that
// Value requests stop while in-flight replies plus buffered vectors would
// exceed the V buffer.
module tb_memory_controller;
  import bs_pkg::*;
  localparam int NL = 2, TOKW = 12, VD = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [ADDR_W-1:0] k_base, v_base;
  logic [TOKW:0] seq_len;
  logic [NL-1:0] lane_valid, lane_ready, new_valid, new_ready, kreq_valid, kreq_ready;
  logic [NL-1:0] krsp_valid, kbuf_wr, new_blocked;
  logic [TOKW-1:0] lane_tok [NL], new_tok [NL], kbuf_tok [NL];
  logic [RW-1:0] lane_r [NL], kbuf_r [NL];
  logic [ADDR_W-1:0] kreq_addr [NL];
  logic [TOKW+RW-1:0] kreq_tag [NL], krsp_tag [NL];
  logic [DIM-1:0] krsp_data [NL], kbuf_plane [NL];
  logic vidx_valid, vidx_pop, vreq_valid, vreq_ready, vrsp_valid, vbuf_wr;
  logic [TOKW-1:0] vidx_tok;
  logic [$clog2(VD+1)-1:0] vbuf_count;
  logic [ADDR_W-1:0] vreq_addr;
  logic [DIM*QW-1:0] vrsp_data, vbuf_data;
  int checks = 0, failures = 0;

  memory_controller #(.NL(NL), .TOKW(TOKW), .VDEPTH(VD)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int v_inflight, v_buf, n_credit_stop;
  bit pop_s;
  initial begin
    k_base = 32'h1000; v_base = 32'h8000; seq_len = 13'd1000;
    lane_valid = 0; new_valid = 0; kreq_ready = 0; krsp_valid = 0;
    vidx_valid = 0; vidx_tok = 0; vreq_ready = 0; vrsp_valid = 0; vrsp_data = 0; vbuf_count = 0;
    for (int l = 0; l < NL; l++) begin
      lane_tok[l] = 0; new_tok[l] = 0; lane_r[l] = 0; krsp_tag[l] = 0; krsp_data[l] = 0;
    end
    v_inflight = 0; v_buf = 0; n_credit_stop = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      for (int l = 0; l < NL; l++) begin
        lane_valid[l] = $urandom % 2;
        new_valid[l]  = $urandom % 2;
        kreq_ready[l] = ($urandom % 4) != 0;
        lane_tok[l]   = 12'($urandom % 1000);
        lane_r[l]     = RW'($urandom % 11 + 1);
        new_tok[l]    = 12'($urandom % 1000);
        krsp_valid[l] = $urandom % 2;
        krsp_tag[l]   = 16'($urandom);
        krsp_data[l]  = {$urandom, $urandom};
      end
      vidx_valid = $urandom % 2;
      vidx_tok   = 12'($urandom % 1000);
      vreq_ready = $urandom % 2;
      vrsp_valid = (v_inflight > 0) && ($urandom % 3 == 0);
      vbuf_count = 3'(v_buf);
      #0.5;
      for (int l = 0; l < NL; l++) begin
        int et, er;
        et = lane_valid[l] ? int'(lane_tok[l]) : int'(new_tok[l]);
        er = lane_valid[l] ? int'(lane_r[l]) : 0;
        chk(kreq_valid[l] == (lane_valid[l] || new_valid[l]), "kreq_valid");
        if (kreq_valid[l]) begin
          chk(kreq_addr[l] == 32'h1000 + 32'(er * 1000 + et) && kreq_tag[l] == {12'(et), 4'(er)},
              $sformatf("address lane %0d", l));
        end
        chk(lane_ready[l] == kreq_ready[l], "lane_ready");
        chk(new_ready[l] == (kreq_ready[l] && !lane_valid[l]), "lane request has priority");
        chk(kbuf_wr[l] == krsp_valid[l] && kbuf_plane[l] == krsp_data[l] &&
            {kbuf_tok[l], kbuf_r[l]} == krsp_tag[l], "reply routing");
      end
      chk(vreq_valid == (vidx_valid && (v_inflight + v_buf < VD)), "V credit");
      if (vidx_valid && !vreq_valid) n_credit_stop++;
      if (vreq_valid) chk(vreq_addr == 32'h8000 + 32'(vidx_tok), "V address");
      chk(vidx_pop == (vreq_valid && vreq_ready), "IDX pop");
      pop_s = vidx_pop;
      @(negedge clk);
      if (pop_s) v_inflight++;
      if (vrsp_valid) begin v_inflight--; v_buf++; end
      if (v_buf > 0 && ($urandom % 5 == 0)) v_buf--;
    end
    chk(n_credit_stop > 0, "V credit limit never reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
