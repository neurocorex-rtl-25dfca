// tb_config_regs: checks the reset values of the global settings (learning
// window 15 / 30 steps and +-1 steps from the learning-rule figure), writes
// every register and reads it back both on the cfg output and through the
// read reply, and checks that requests for other targets are not taken. A
// random phase then mixes 400 writes and reads of all registers, of two
// unused register numbers (ignored, read as 0) and of other targets, and
// compares every reply and the cfg output with a model of the field widths.
module tb_config_regs;
  import ncx_pkg::*;
  logic clk = 0, rst_n = 0, req_valid = 0;
  host_req_t req = '0;
  logic req_ready, rsp_valid;
  logic [23:0] rsp_data;
  gcfg_t cfg;
  int checks = 0, failures = 0;

  config_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input logic wr, input target_t tg, input logic [15:0] col,
                        input logic [23:0] d, output logic [23:0] rd, output logic taken);
    @(negedge clk);
    req_valid = 1; req = '{write: wr, target: tg, row: 16'h0, col: col, data: d};
    #1 taken = req_ready;
    @(negedge clk);
    req_valid = 0;
    rd = rsp_data;
    if (!wr && taken) begin
      checks++; if (!rsp_valid) begin failures++; $display("no reply"); end
    end
  endtask

  initial begin
    logic [23:0] rd, vals [8];
    logic tk;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (cfg.dw_pos != 1 || cfg.dw_neg != 1 || cfg.t_pre != 15 || cfg.t_post != 30 ||
        cfg.stdp_en_aa || cfg.stdp_en_in || cfg.lambda_syn != 0 || cfg.w_shift != 10 ||
        cfg.mon_neuron != 0) begin failures++; $display("reset values %p", cfg); end
    vals = '{24'h03FFFF, 24'h7, 24'h3, 24'h20, 24'h40, 24'h3, 24'h6, 24'h63};
    for (int i = 0; i < 8; i++) begin
      access(1, TGT_GLOBAL, 16'(i), vals[i], rd, tk);
      checks++; if (!tk) begin failures++; $display("write %0d not taken", i); end
    end
    checks++;
    if (cfg.lambda_syn != -18'sd1 || cfg.dw_pos != 7 || cfg.dw_neg != 3 || cfg.t_pre != 8'h20 ||
        cfg.t_post != 8'h40 || !cfg.stdp_en_aa || !cfg.stdp_en_in || cfg.w_shift != 6 ||
        cfg.mon_neuron != 16'h63) begin failures++; $display("written values %p", cfg); end
    for (int i = 0; i < 8; i++) begin
      logic [23:0] exp;
      access(0, TGT_GLOBAL, 16'(i), 24'h0, rd, tk);
      exp = (i == 0) ? 24'hFFFFFF : vals[i];   // lambda_syn reads back sign-extended
      checks++; if (rd != exp) begin failures++; $display("reg %0d read %h expected %h", i, rd, exp); end
    end
    access(1, TGT_WAA, 16'd1, 24'h55, rd, tk);
    checks++; if (tk || cfg.dw_pos != 7) begin failures++; $display("foreign target taken"); end
    // random phase
    begin
      logic [23:0] m [10], mask [10], d, exp;
      logic [15:0] c;
      logic wr;
      target_t tg;
      mask = '{24'h03FFFF, 24'hFF, 24'hFF, 24'hFF, 24'hFF, 24'h3, 24'hF, 24'hFFFF, 24'h0, 24'h0};
      for (int i = 0; i < 10; i++) m[i] = (i < 8) ? (vals[i] & mask[i]) : 24'h0;
      for (int n = 0; n < 400; n++) begin
        c  = 16'($urandom_range(0, 9));
        wr = 1'($urandom);
        d  = 24'($urandom);
        tg = ($urandom_range(0, 3) == 0) ? target_t'($urandom_range(0, 4)) : TGT_GLOBAL;
        access(wr, tg, c, d, rd, tk);
        checks++;
        if (tk != (tg == TGT_GLOBAL)) begin failures++; $display("op %0d: taken %b for target %0d", n, tk, tg); end
        if (tg == TGT_GLOBAL) begin
          if (wr) m[c] = d & mask[c];
          else begin
            exp = (c == 0) ? {{6{m[0][17]}}, m[0][17:0]} : m[c];
            checks++;
            if (rd != exp) begin failures++; $display("op %0d: reg %0d read %h expected %h", n, c, rd, exp); end
          end
        end
        checks++;
        if (cfg.lambda_syn != m[0][17:0] || cfg.dw_pos != m[1][7:0] || cfg.dw_neg != m[2][7:0] ||
            cfg.t_pre != m[3][7:0] || cfg.t_post != m[4][7:0] ||
            {cfg.stdp_en_in, cfg.stdp_en_aa} != m[5][1:0] || cfg.w_shift != m[6][3:0] ||
            cfg.mon_neuron != m[7][15:0]) begin
          failures++; $display("op %0d: cfg %p", n, cfg);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
