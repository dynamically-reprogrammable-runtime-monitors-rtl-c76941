// tb_mtl_prog_loader: self-checking test of the byte-wide program loader.
// Random images of 20 bits (3 bytes, with 4 padding bits) and of 1040 bits
// (130 bytes, the size of the default monitor) are sent most significant byte
// first, one byte per cycle with write_en high, with idle cycles between
// bytes. After the last byte the configuration must equal the image, and it
// must not change while write_en is low.
module tb_mtl_prog_loader;
  localparam int BITS_S = 20;
  localparam int BITS_L = 1040;

  logic clk = 0, rst_n = 0, we_s = 0, we_l = 0;
  logic [7:0] byte_s, byte_l;
  logic [BITS_S-1:0] cfg_s;
  logic [BITS_L-1:0] cfg_l;
  int checks = 0, failures = 0;

  mtl_prog_loader #(.CFG_BITS(BITS_S)) dut_s (.clk, .rst_n, .write_en(we_s), .program_byte(byte_s), .cfg(cfg_s));
  mtl_prog_loader #(.CFG_BITS(BITS_L)) dut_l (.clk, .rst_n, .write_en(we_l), .program_byte(byte_l), .cfg(cfg_l));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0]   img_s;
    logic [1047:0] img_l;
    byte_s = 0; byte_l = 0;
    repeat (2) @(posedge clk);
    checks++;
    if (cfg_s != 0 || cfg_l != 0) failures++;    // reset image
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      img_s = 24'($urandom);
      for (int w = 0; w < 33; w++) img_l[w*32 +: 32] = $urandom;
      for (int b = 2; b >= 0; b--) begin
        @(negedge clk);
        we_s = 1; byte_s = img_s[b*8 +: 8];
        @(negedge clk);
        we_s = 0; byte_s = 8'($urandom);          // idle cycle, garbage on the bus
      end
      for (int b = 129; b >= 0; b--) begin
        @(negedge clk);
        we_l = 1; byte_l = img_l[b*8 +: 8];
      end
      @(negedge clk);
      we_l = 0; byte_l = 8'($urandom);
      repeat (3) @(negedge clk);
      checks++;
      if (cfg_s != img_s[BITS_S-1:0]) begin
        failures++;
        $display("small image: got %h expected %h", cfg_s, img_s[BITS_S-1:0]);
      end
      checks++;
      if (cfg_l != img_l[BITS_L-1:0]) begin
        failures++;
        $display("large image mismatch");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
