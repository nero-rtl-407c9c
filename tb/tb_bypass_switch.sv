// tb_bypass_switch: drives random valid, ready and data on every port of the
// switch in each of the four phases and compares all outputs with the routing
// table (load: host->HBM; compute: HBM->PE and PE->HBM; unload: HBM->host;
// bypass: host->PE and PE->host).
module tb_bypass_switch;
  import nero_pkg::*;
  int checks = 0, failures = 0;

  phase_e phase;
  logic host_in_valid, host_in_ready, hbm_rd_valid, hbm_rd_ready, pe_out_valid, pe_out_ready;
  logic pe_in_valid, pe_in_ready, hbm_wr_valid, hbm_wr_ready, host_out_valid, host_out_ready;
  logic [511:0] host_in_data, hbm_rd_data, pe_out_data, pe_in_data, hbm_wr_data, host_out_data;

  bypass_switch dut (.*);

  task automatic expect1(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s phase %0d: got %b expected %b", what, phase, got, exp); end
  endtask

  initial begin
    for (int i = 0; i < 400; i++) begin
      logic ld, cp, ul, bp;
      phase = phase_e'(i % 4);
      {host_in_valid, hbm_rd_valid, pe_out_valid, pe_in_ready, hbm_wr_ready, host_out_ready} = 6'($urandom);
      host_in_data = {16{$urandom}}; hbm_rd_data = {16{$urandom}}; pe_out_data = {16{$urandom}};
      #1;
      ld = phase == PH_LOAD; cp = phase == PH_COMPUTE; ul = phase == PH_UNLOAD; bp = phase == PH_BYPASS;
      expect1("host_in_ready", host_in_ready, (ld && hbm_wr_ready) || (bp && pe_in_ready));
      expect1("hbm_rd_ready", hbm_rd_ready, (cp && pe_in_ready) || (ul && host_out_ready));
      expect1("pe_out_ready", pe_out_ready, (cp && hbm_wr_ready) || (bp && host_out_ready));
      expect1("pe_in_valid", pe_in_valid, (cp && hbm_rd_valid) || (bp && host_in_valid));
      expect1("hbm_wr_valid", hbm_wr_valid, (ld && host_in_valid) || (cp && pe_out_valid));
      expect1("host_out_valid", host_out_valid, (ul && hbm_rd_valid) || (bp && pe_out_valid));
      checks++;
      if ((cp && pe_in_data !== hbm_rd_data) || (bp && pe_in_data !== host_in_data) ||
          (ld && hbm_wr_data !== host_in_data) || (cp && hbm_wr_data !== pe_out_data) ||
          (ul && host_out_data !== hbm_rd_data) || (bp && host_out_data !== pe_out_data)) begin
        failures++; $display("data route wrong in phase %0d", phase);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
