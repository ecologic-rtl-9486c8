// tb_config_mem -- both loading paths of the configuration memory.
//  1. frame loading: a random image written frame by frame must appear in the
//     tile configurations (tile t = low TILE_BITS of its frame span);
//  2. partial reconfiguration: rewriting one tile's frames must leave every other
//     tile unchanged;
//  3. scan loading: a second random image shifted in bit by bit (bit 0 first)
//     must land in the same places after exactly CFG_BITS clocks, and scan_out
//     must then give the old image back bit by bit while shifting again;
//  4. the configuration reaches the tiles only while apply is high;
//  5. reset clears everything.
module tb_config_mem;
  import ecologic_pkg::*;
  import tb_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  logic frame_we = 0, scan_en = 0, scan_in = 0, scan_out;
  logic apply = 1;
  logic [FA_W-1:0] frame_addr = '0;
  logic [FRAME_W-1:0] frame_data = '0;
  logic [NTILES-1:0][TILE_BITS-1:0] tile_cfg;
  frames_t img, img2;
  int checks = 0, failures = 0, cycles = 0;

  config_mem dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic compare(frames_t f, string what);
    logic [NFRAMES*FRAME_W-1:0] flat = f;
    for (int t = 0; t < NTILES; t++) begin
      checks++;
      if (tile_cfg[t] !== flat[t*FRAMES_PER_TILE*FRAME_W +: TILE_BITS]) begin
        failures++;
        $display("FAIL %s: tile %0d", what, t);
      end
    end
  endtask

  initial begin
    logic [NFRAMES*FRAME_W-1:0] flat;
    for (int i = 0; i < NFRAMES; i++) begin img[i] = $urandom; img2[i] = $urandom; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare('0, "after reset");
    // 1. frames
    for (int i = 0; i < NFRAMES; i++) begin
      frame_we = 1; frame_addr = FA_W'(i); frame_data = img[i];
      @(negedge clk);
    end
    frame_we = 0;
    compare(img, "frame load");
    // 2. partial: rewrite the frames of tile 5 only
    for (int i = 5 * FRAMES_PER_TILE; i < 6 * FRAMES_PER_TILE; i++) begin
      frame_we = 1; frame_addr = FA_W'(i); frame_data = ~img[i]; img[i] = ~img[i];
      @(negedge clk);
    end
    frame_we = 0;
    compare(img, "partial reconfiguration");
    // 3. scan: shift img2 in, watching img come out
    flat = img2;
    begin
      automatic logic [NFRAMES*FRAME_W-1:0] old = img;
      automatic int bad = 0;
      for (int b = 0; b < NFRAMES * FRAME_W; b++) begin
        if (scan_out !== old[b]) bad++;
        scan_en = 1; scan_in = flat[b];
        @(negedge clk);
      end
      scan_en = 0;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL scan_out: %0d bits wrong", bad); end
    end
    compare(img2, "scan load");
    // held while idle
    repeat (5) @(negedge clk);
    compare(img2, "hold");
    // frame write wins over a shift in the same clock
    frame_we = 1; scan_en = 1; frame_addr = '0; frame_data = 32'h0;
    img2[0] = 32'h0;
    @(negedge clk); frame_we = 0; scan_en = 0;
    compare(img2, "frame over scan");
    apply = 0; #1 compare('0, "not applied");
    apply = 1; #1 compare(img2, "applied again");
    rst_n = 0; @(negedge clk); rst_n = 1;
    compare('0, "reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
