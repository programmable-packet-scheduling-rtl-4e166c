// tb_next_hop_lut: checks the per-logical-PIFO table.
//
// After reset every entry must read NH_NONE with the shaping flag clear.
// Then random entries are written and both read ports are compared every
// cycle with a model array; a write must be visible on the next cycle.
module tb_next_hop_lut;
  import pifo_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      cfg_we, cfg_shaping, sh_flag;
  lpifo_t    cfg_lpifo, rd_lpifo, sh_lpifo;
  nh_entry_t cfg_entry, rd_entry;

  next_hop_lut dut (.*);

  int checks = 0, failures = 0;
  nh_entry_t m_tbl [N_LPIFO];
  logic      m_sh  [N_LPIFO];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_lpifo = '0; cfg_entry = '0; cfg_shaping = 0;
    rd_lpifo = '0; sh_lpifo = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N_LPIFO; i++) begin
      m_tbl[i] = '{op: NH_NONE, default: '0};
      m_sh[i]  = 1'b0;
    end
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      rd_lpifo = lpifo_t'($urandom);
      sh_lpifo = lpifo_t'($urandom);
      #1;
      checks++;
      if (rd_entry !== m_tbl[rd_lpifo] || sh_flag !== m_sh[sh_lpifo]) begin
        failures++;
        $display("cyc %0d: lpifo %0d read %h expected %h", cyc, rd_lpifo, rd_entry, m_tbl[rd_lpifo]);
      end
      cfg_we      = (cyc > 100) && ($urandom_range(0, 2) == 0);
      cfg_lpifo   = lpifo_t'($urandom);
      cfg_entry   = '{op: nh_op_e'($urandom_range(0, 3)), blk: blk_t'($urandom_range(0, 4)),
                      lp_from_meta: 1'($urandom), lpifo: lpifo_t'($urandom),
                      flow: flow_t'($urandom), meta: meta_t'($urandom)};
      cfg_shaping = 1'($urandom);
      @(posedge clk);
      if (cfg_we) begin
        m_tbl[cfg_lpifo] = cfg_entry;
        m_sh[cfg_lpifo]  = cfg_shaping;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
