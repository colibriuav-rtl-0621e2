// Self-checking testbench for event_frame_buf (full 3432-byte banks).
//
// Fills bank A with frame pattern 0, swaps, then reads frame 0 back from the
// read bank while frame 1 is written into the other bank in the same clocks,
// checking that the concurrent writes do not disturb the frame being read.
// After the next swap frame 1 must be readable, and frame 0 must be gone from
// the read side. Also checks the one-clock read latency and the bank index.
module tb_event_frame_buf;
  import colibri_pkg::*;
  import dvs_tb_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        wr_en = 1'b0, swap = 1'b0, rd_en = 1'b0;
  logic [11:0] wr_addr = '0, rd_addr = '0;
  logic [7:0]  wr_data = '0, rd_data;
  logic        rd_bank;
  int checks = 0, failures = 0;

  event_frame_buf dut (
    .clk_i(clk), .rst_ni(rst_n), .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data),
    .swap_i(swap), .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data), .rd_bank_o(rd_bank)
  );

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  function automatic logic [7:0] pat(input int unsigned f, input int unsigned i);
    return ev_byte(f, i / DVS_GX, i % DVS_GX, 1'b0) ^ 8'(f * 8'h5A);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_swap();
    @(negedge clk); swap = 1'b1;
    @(negedge clk); swap = 1'b0;
  endtask

  // read all of the read bank while (optionally) writing frame wf into the fill bank
  task automatic read_all(input int unsigned exp_f, input bit write_too, input int unsigned wf,
                          input bit expect_match);
    int bad = 0;
    for (int i = 0; i < DVS_GROUPS; i++) begin
      @(negedge clk);
      rd_en = 1'b1; rd_addr = 12'(i);
      wr_en = write_too; wr_addr = 12'(DVS_GROUPS - 1 - i); wr_data = pat(wf, DVS_GROUPS - 1 - i);
      @(negedge clk);
      rd_en = 1'b0; wr_en = 1'b0;
      if ((rd_data == pat(exp_f, i)) != expect_match) bad++;
    end
    if (expect_match) check(bad == 0, $sformatf("frame %0d read back: %0d bytes wrong", exp_f, bad));
    else check(bad < DVS_GROUPS / 8, $sformatf("old frame %0d no longer on the read side (%0d still match)", exp_f, DVS_GROUPS - bad));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    check(rd_bank == 1'b1, "read bank is 1 after reset (fill bank 0)");

    // fill frame 0
    for (int i = 0; i < DVS_GROUPS; i++) begin
      @(negedge clk); wr_en = 1'b1; wr_addr = 12'(i); wr_data = pat(0, i);
    end
    @(negedge clk); wr_en = 1'b0;
    do_swap();
    check(rd_bank == 1'b0, "read bank 0 after first swap");

    // read frame 0 while frame 1 is written
    read_all(0, 1'b1, 1, 1'b1);
    // read latency: data appears exactly one clock after rd_en
    @(negedge clk); rd_en = 1'b1; rd_addr = 12'd100;
    @(posedge clk); #1 rd_en = 1'b0;
    check(rd_data == pat(0, 100), "data one clock after rd_en");
    @(negedge clk); rd_addr = 12'd200;
    @(posedge clk); #1;
    check(rd_data == pat(0, 100), "data held without rd_en");

    do_swap();
    check(rd_bank == 1'b1, "read bank 1 after second swap");
    read_all(1, 1'b0, 0, 1'b1);
    read_all(0, 1'b0, 0, 1'b0);

    // reset returns the pointer to bank 0
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    check(rd_bank == 1'b1, "reset restores the bank pointer");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
