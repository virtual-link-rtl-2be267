// tb_vl_addr_decode: checks the device-address field split on random
// addresses against fields computed here with shifts and masks, and that
// only addresses in the VLRD's PA space with its id give a hit.
module tb_vl_addr_decode;
  import vl_pkg::*;

  vl_pa_t      pa;
  logic        hit;
  vl_sqi_t     sqi;
  logic [3:0]  vlrd_id;
  logic [5:0]  page;
  logic [11:0] offset;

  vl_addr_decode #(.VLRD_ID(4'd3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s pa=%h", what, pa); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned a;
    int hits = 0;
    for (int n = 0; n < 2000; n++) begin
      a = {$urandom, $urandom};
      a = a & 64'h000F_FFFF_FFFF_FFFF;
      // half of the addresses in the VLRD space (0x20 << 28) with id 3
      if (n % 2 == 0) a = (a & 64'h0FFF_FFFF) | (64'h20 << 28);
      if (n % 4 == 0) a = (a & ~(64'hF << 24)) | (64'h3 << 24);
      pa = vl_pa_t'(a);
      #1;
      check(sqi == vl_sqi_t'((a >> 18) & 63), "SQI = PA[23:18]");
      check(vlrd_id == 4'((a >> 24) & 15), "VLRD id = PA[27:24]");
      check(page == 6'((a >> 12) & 63), "page = PA[17:12]");
      check(offset == 12'(a & 12'hFFF), "offset = PA[11:0]");
      check(hit == (((a >> 28) == 64'h20) && (((a >> 24) & 15) == 3)), "hit only in PA space with own id");
      if (hit) hits++;
    end
    check(hits > 300, "enough hits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
