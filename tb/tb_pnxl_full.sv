// tb_pnxl_full: the FPGA top level at its default sizes (four channels,
// 2^27-word output buffer, i.e. 4 Gbit). The processor side configures all
// channels over the bus and starts a free-flowing run; one pulse per channel
// must come out as one UDP frame per channel with the right header, channel
// and energy, the buffer must be empty afterwards, the MCA link must deliver
// the four energies and the metadata queue must hold four entries.
module tb_pnxl_full;
  import pnxl_pkg::*;
  logic clk = 0, rst = 1;
  logic [NCH-1:0][ADC_W-1:0] adc = '0;
  wr_time_t wrt = '0;
  logic [11:0] bus_addr = '0;
  logic bus_wr = 0, bus_rd = 0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic tx_valid, tx_sof, tx_eof;
  logic tx_ready = 1;
  logic [15:0] tx_data;
  logic [3:0] mca_data;
  logic mca_valid, mca_first;
  int checks = 0, failures = 0, n_frames = 0, n_mca = 0, hw = 0;
  logic [31:0] w0, w2;
  int seen [NCH];

  pnxl_fpga_top dut (
    .clk, .rst, .adc, .wr_time(wrt), .bus_addr, .bus_wr, .bus_rd, .bus_wdata, .bus_rdata,
    .tx_valid, .tx_ready, .tx_data, .tx_sof, .tx_eof, .mca_data, .mca_valid, .mca_first);

  always #4 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    wrt.cycles = wrt.cycles + 28'd1;
  end

  // frame sink: record words 0 and 2 follow the 21 header half-words
  always @(negedge clk) begin
    if (tx_valid) begin
      hw = tx_sof ? 0 : hw + 1;
      if (hw == 21) w0[31:16] = tx_data;
      if (hw == 22) w0[15:0] = tx_data;
      if (hw == 25) w2[31:16] = tx_data;
      if (hw == 26) w2[15:0] = tx_data;
      if (tx_eof) begin
        checks++; n_frames++;
        if (hw != 21 + 2 * REC_WORDS - 1 || w0[31:28] != 4'd8 || w0[27:24] >= NCH ||
            w0[15:0] != 16'(REC_WORDS) || w2[15:0] < 16'(1000 + 500 * w0[27:24] - 2) ||
            w2[15:0] > 16'(1000 + 500 * w0[27:24] + 2)) begin
          failures++; $display("frame %0d w0 %h w2 %h", hw, w0, w2);
        end else seen[w0[27:24]]++;
      end
    end
    if (mca_valid && mca_first) n_mca++;
  end

  task automatic bus_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_wdata = d; bus_wr = 1;
    @(negedge clk);
    bus_wr = 0;
  endtask

  task automatic bus_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_addr = a; bus_rd = 1;
    @(negedge clk);
    bus_rd = 0;
    d = bus_rdata;
  endtask

  initial begin
    logic [31:0] d;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int c = 0; c < NCH; c++) bus_write(12'(12'h100 + 64 * c), 32'd1);
    bus_write(12'h000, 32'h1);
    repeat (100) @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      adc[c] = ADC_W'(1000 + 500 * c);
      repeat (50) @(negedge clk);
    end
    repeat (300) @(negedge clk);
    adc = '0;
    repeat (2000) @(negedge clk);
    checks += 4;
    if (n_frames != NCH) begin failures++; $display("frames %0d", n_frames); end
    foreach (seen[c]) if (seen[c] != 1) begin failures++; $display("channel %0d frames %0d", c, seen[c]); end
    if (n_mca != NCH) begin failures++; $display("mca %0d", n_mca); end
    bus_read(12'h002, d);
    if (d[1:0] != 2'b01) begin failures++; $display("status %h", d); end
    bus_read(12'h003, d);
    checks++;
    if (d != 0) begin failures++; $display("buffer count %0d", d); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
