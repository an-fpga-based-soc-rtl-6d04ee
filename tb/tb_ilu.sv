// tb_ilu: random neuron outputs in both layers; in layer 0 a spike must be
// written to spike memory 2 and nothing reach the decoder, in layer 1 the
// reverse, with index, time and potential carried unchanged.
module tb_ilu;
  import snn_pkg::*;
  logic layer, in_t_we, in_v_we;
  logic [9:0] in_idx;
  stime_t in_time, sp_wr_data, dec_time;
  vmem_t in_v, dec_v;
  logic sp_wr_en, dec_t_we, dec_v_we;
  logic [9:0] sp_wr_addr;
  logic [3:0] dec_idx;
  int checks = 0, failures = 0;

  ilu #(.JW(10), .OW(4)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      layer = 1'($urandom); in_t_we = 1'($urandom); in_v_we = 1'($urandom);
      in_idx = 10'($urandom_range(layer ? 9 : 599)); in_time = 8'($urandom); in_v = vmem_t'($urandom);
      #1;
      chk(sp_wr_en == (!layer && in_t_we), "spike memory write enable");
      chk(dec_t_we == (layer && in_t_we) && dec_v_we == (layer && in_v_we), "decoder write enables");
      if (sp_wr_en) chk(sp_wr_addr == in_idx && sp_wr_data == in_time, "spike memory data");
      if (dec_t_we || dec_v_we)
        chk(int'(dec_idx) == int'(in_idx) && dec_time == in_time && dec_v == in_v, "decoder data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
