// tb_relobi_encoder: checks the manager-side relOBI adapter. Request fields must appear as
// reference Hsiao codewords with req on all three lanes (and no req while isolated); on the
// response side one disagreeing lane must be outvoted, a single-bit read-data error
// corrected and flagged, a double-bit error flagged as uncorrectable.
module tb_relobi_encoder;
  import relobi_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  logic     iso;
  obi_req_t oreq;
  obi_rsp_t orsp;
  rel_req_t rreq;
  rel_rsp_t rrsp;
  logic     corr, unc;

  relobi_encoder dut (.isolate_i(iso), .obi_req_i(oreq), .obi_rsp_o(orsp), .rel_req_o(rreq),
                      .rel_rsp_i(rrsp), .corr_o(corr), .uncorr_o(unc));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iso = 0;
    for (int t = 0; t < 200; t++) begin
      oreq.req = 1; oreq.addr = $urandom; oreq.we = 1'($urandom); oreq.be = 4'($urandom);
      oreq.wdata = $urandom;
      iso = (t % 10 == 9);
      rrsp.gnt = 3'b111; rrsp.rvalid = 3'b000; rrsp.err = 3'b000; rrsp.rdata_cw = '0;
      #1;
      chk(rreq.addr_cw == ref_enc32(oreq.addr), "addr codeword");
      chk(rreq.wdata_cw == ref_enc32(oreq.wdata), "wdata codeword");
      chk(rreq.meta_cw == ref_enc_meta(oreq.we, oreq.be), "meta codeword");
      chk(rreq.req == (iso ? 3'b000 : 3'b111), "req lanes / isolation");
      chk(orsp.gnt == !iso, "gnt");
      // response with one faulty lane and a single-bit data error
      begin
        logic [31:0] d;
        int lane, b;
        d = $urandom; lane = $urandom_range(2); b = $urandom_range(38);
        rrsp.rvalid = 3'b111 ^ (3'b1 << lane);
        rrsp.gnt    = 3'b000 ^ (3'b1 << lane);
        rrsp.err    = 3'b000;
        rrsp.rdata_cw = ref_enc32(d) ^ (39'd1 << b);
        #1;
        chk(orsp.rvalid && !orsp.gnt && !orsp.err, "lane vote");
        chk(orsp.rdata == d, "single error corrected");
        chk(corr && !unc, "corr flag");
        rrsp.rvalid = 3'b111; rrsp.gnt = 3'b111;
        rrsp.rdata_cw = ref_enc32(d) ^ (39'd1 << b) ^ (39'd1 << ((b + 7) % 39));
        #1;
        chk(unc, "double error flagged");
        rrsp.rdata_cw = ref_enc32(d);
        #1;
        chk(!corr && !unc && orsp.rdata == d, "clean response");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
