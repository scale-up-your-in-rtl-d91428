// tb_event_unit: self-checking test of the event unit. Checked: hardware
// events reach only the cores whose mask selects them, a sleeping core gets
// its clock back one cycle after the event, clearing works, a barrier fires
// only when every core of the barrier mask has arrived, local software events
// and outgoing inter-cluster software events, and incoming software events.
module tb_event_unit;
  import aimc_pkg::*;
  localparam int unsigned NC = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic dma_rd = 0, dma_wr = 0, ima = 0;
  logic [N_SW_EVT-1:0] sw_in = '0;
  sw_evt_t sw_out;
  logic [NC-1:0] sleep = '0, evt, clk_en;
  logic [NC-1:0][EVT_W-1:0] buffer;
  int checks = 0, failures = 0;

  event_unit dut (.clk_i(clk), .rst_ni(rst_n), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr),
    .cfg_wdata_i(cfg_wdata), .dma_rd_done_i(dma_rd), .dma_wr_done_i(dma_wr), .ima_done_i(ima),
    .sw_evt_i(sw_in), .sw_evt_o(sw_out), .core_sleep_i(sleep), .core_evt_o(evt), .core_clk_en_o(clk_en),
    .core_buf_o(buffer));

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr(8'h00, 32'h4);          // core 0 waits for IMA
    wr(8'h04, 32'h3);          // core 1 waits for DMA read/write
    wr(8'h08, 32'h100);        // core 2 waits for software event 0
    wr(8'h0C, 32'h8);          // core 3 waits for the barrier
    sleep = '1;
    @(negedge clk);
    chk(clk_en == '0 && evt == '0, "all cores asleep");
    // IMA event
    ima = 1; @(negedge clk); ima = 0;
    chk(evt == 4'b0001 && clk_en == 4'b0001, "IMA event wakes core 0 only, one cycle later");
    sleep[0] = 0;
    wr(8'h20, 32'h4);
    chk(evt[0] == 0, "clear");
    // DMA write event
    dma_wr = 1; @(negedge clk); dma_wr = 0;
    chk(evt == 4'b0010, "DMA event wakes core 1");
    wr(8'h24, 32'hFFFF_FFFF);
    // local software event 0
    wr(8'h40, 32'h0);
    chk(evt == 4'b0100, "local software event wakes core 2");
    chk(sw_out.valid == 0, "local event not sent out");
    wr(8'h28, 32'hFFFF_FFFF);
    // software event 3 to clusters 1 and 4
    @(negedge clk); cfg_we = 1; cfg_addr = 8'h40; cfg_wdata = 32'h0012_0003;
    @(negedge clk); cfg_we = 0;
    chk(sw_out.valid && sw_out.cl_mask == 16'h0012 && sw_out.id == 3, "outgoing software event");
    @(negedge clk);
    chk(!sw_out.valid, "outgoing event is a pulse");
    // incoming software event 0 from another cluster
    sw_in = 8'h01; @(negedge clk); sw_in = '0;
    chk(evt[2], "incoming software event");
    wr(8'h28, 32'hFFFF_FFFF);
    // barrier over cores 0..3
    wr(8'h44, 0); wr(8'h44, 1); wr(8'h44, 2);
    chk(!evt[3] && !buffer[3][EVT_BARRIER], "barrier waits for all cores");
    wr(8'h44, 3);
    chk(evt[3], "barrier fires when all arrived");
    wr(8'h2C, 32'h8);
    // barrier with a mask of cores 1 and 3
    wr(8'h48, 32'ha);
    wr(8'h44, 1);
    chk(!evt[3], "partial barrier not yet");
    wr(8'h44, 3);
    chk(evt[3], "masked barrier fires");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
