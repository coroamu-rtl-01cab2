// tb_amu_spm: self-checking test of the scratchpad. Line writes with word
// masks, line reads one cycle later, core 8-byte reads and byte-strobed
// writes, checked against a reference byte array; plus the rule that an
// AMU line write wins over a core write to the same word.
module tb_amu_spm;
  import coroamu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic lw_en, lr_en, core_en, core_we;
  logic [SPM_LINE_W-1:0] lw_line, lr_line;
  logic [7:0] lw_mask, core_be;
  logic [LINE_W-1:0] lw_data, lr_data;
  logic [SPM_ADDR_W-1:0] core_addr;
  logic [63:0] core_wdata, core_rdata;
  amu_spm dut (.*);

  logic [7:0] ref_m [SPM_BYTES];

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [511:0] rline();
    logic [511:0] r; for (int k = 0; k < 16; k++) r[32*k +: 32] = $urandom; return r;
  endfunction

  initial begin
    lw_en = 0; lr_en = 0; core_en = 0; core_we = 0; lw_line = 0; lr_line = 0;
    lw_mask = 0; core_be = 0; lw_data = 0; core_addr = 0; core_wdata = 0;
    @(negedge clk);
    // initialise 32 lines fully
    for (int l = 0; l < 32; l++) begin
      lw_en = 1; lw_line = 9'(l * 16); lw_mask = 8'hFF; lw_data = rline();
      for (int b = 0; b < 64; b++) ref_m[l*16*64 + b] = lw_data[8*b +: 8];
      @(negedge clk);
    end
    lw_en = 0;
    // random operations
    for (int t = 0; t < 600; t++) begin
      int kind; int l; int w;
      kind = $urandom_range(0, 3); l = $urandom_range(0, 31) * 16; w = $urandom_range(0, 7);
      case (kind)
        0: begin  // masked line write
          lw_en = 1; lw_line = 9'(l); lw_mask = 8'($urandom); lw_data = rline();
          for (int b = 0; b < 64; b++) if (lw_mask[b/8]) ref_m[l*64 + b] = lw_data[8*b +: 8];
          @(negedge clk); lw_en = 0;
        end
        1: begin  // line read
          lr_en = 1; lr_line = 9'(l); @(negedge clk); lr_en = 0;
          begin
            logic [511:0] e; for (int b = 0; b < 64; b++) e[8*b +: 8] = ref_m[l*64 + b];
            check(lr_data == e, "line read");
          end
        end
        2: begin  // core write with byte strobes
          core_en = 1; core_we = 1; core_addr = 15'(l*64 + w*8); core_be = 8'($urandom);
          core_wdata = {$urandom, $urandom};
          for (int k = 0; k < 8; k++) if (core_be[k]) ref_m[l*64 + w*8 + k] = core_wdata[8*k +: 8];
          @(negedge clk); core_en = 0; core_we = 0;
        end
        default: begin  // core read
          core_en = 1; core_we = 0; core_addr = 15'(l*64 + w*8); @(negedge clk); core_en = 0;
          begin
            logic [63:0] e; for (int k = 0; k < 8; k++) e[8*k +: 8] = ref_m[l*64 + w*8 + k];
            check(core_rdata == e, "core read");
          end
        end
      endcase
    end
    // collision: AMU line write and core write to the same word
    lw_en = 1; lw_line = 9'd16; lw_mask = 8'h01; lw_data = '0; lw_data[63:0] = 64'h1111_2222_3333_4444;
    core_en = 1; core_we = 1; core_addr = 15'(16*64); core_be = 8'hFF; core_wdata = 64'hDEAD_BEEF_0000_0000;
    @(negedge clk); lw_en = 0; core_we = 0; core_addr = 15'(16*64);
    @(negedge clk); core_en = 0;
    check(core_rdata == 64'h1111_2222_3333_4444, "AMU write wins");
    // last line of the 32 KB array
    lw_en = 1; lw_line = 9'd511; lw_mask = 8'h80; lw_data = '0; lw_data[511:448] = 64'hA5A5_0000_FFFF_1234;
    @(negedge clk); lw_en = 0; core_en = 1; core_addr = 15'h7FF8;
    @(negedge clk); core_en = 0;
    check(core_rdata == 64'hA5A5_0000_FFFF_1234, "top word of 32 KB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
