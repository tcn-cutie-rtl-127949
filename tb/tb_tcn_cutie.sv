// tb_tcn_cutie: end-to-end test of the accelerator at its full size
// (96 channels and OCUs, 64x64 map capacity, 24-step TCN memory), driven
// only through its ports, the way a host would drive it.
//
// The host program runs a small hybrid 2D-CNN / 1D-TCN network five times,
// once per "frame", each time with a new random 6x6x96 input map:
//   L0 conv 6x6 -> 6x6 (act half 0 -> 1), all 96 output channels
//   L1 conv 6x6, 2x2 max pooling -> 3x3 (1 -> 0), only 40 output channels
//   L2 conv 3x3, 2x2 average (sum) pooling -> 1x1 (0 -> 1)
//   L3 conv 1x1 -> pushed into the TCN memory (the frame's feature vector)
//   L4 TCN layer: last 5 time steps, dilation 2, wrapped to a 2x3 map (-> 0)
//   L5 conv 2x3 -> 2x3 (0 -> 1)
// Before the first frame the TCN memory is cleared and two vectors are
// pushed by the host. Inference is started by the start register and, on
// alternate frames, by the external trigger line. Weights and thresholds
// are written through the data port; outputs of L4 and L5 are read back
// through it and compared with a reference model of the network computed
// here (plain integer convolution with zero padding, pooling, thresholds,
// and a queue for the TCN memory). The cycle count from start to interrupt
// is checked against sum(4 + H*(W+2) + 3) over the layers, and every
// mechanism is counted: zero padding columns, max and sum pooling, idle OCUs
// disabled, causal padding in the TCN read, pushes into the TCN memory from
// the datapath and from the host, host requests stalled while busy, the two
// trigger sources and the interrupt. A mechanism that never happened counts
// as a failure.
module tb_tcn_cutie;
  import cutie_pkg::*;
  localparam int NC = 96;
  localparam int PB = 20;          // compressed bytes per pixel
  localparam int NLAY = 6;
  localparam int NFRAMES = 5;
  localparam int MD = 8;           // largest map side used here

  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr;
  logic dreq = 0, dwe = 0, dgnt, drvalid;
  logic [19:0] daddr = '0;
  logic [31:0] dwdata = '0, drdata;
  logic ext_trig = 0, irq;
  int checks = 0, failures = 0;

  tcn_cutie dut (
    .clk_i(clk), .rst_ni(rst_n),
    .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite), .paddr_i(paddr), .pwdata_i(pwdata),
    .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr),
    .dreq_i(dreq), .dgnt_o(dgnt), .dwe_i(dwe), .daddr_i(daddr), .dwdata_i(dwdata),
    .drvalid_o(drvalid), .drdata_o(drdata), .ext_trig_i(ext_trig), .irq_o(irq));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ network
  typedef struct {
    int w, h, pool, ib, ob, st, dt, noc, wb, d, L;
  } lay_t;
  lay_t lay [NLAY];

  byte  wts [NLAY][NC][3][3][NC];   // trits as -1/0/1
  int   tlo [NLAY][NC], thi [NLAY][NC];
  byte  in_map [NC][MD][MD];
  byte  tcn_q [$][NC];              // pushed vectors, oldest first

  function automatic int rtrit(int density);
    if ($urandom_range(0, 99) >= density) return 0;
    return $urandom_range(0, 1) ? 1 : -1;
  endfunction

  // reference layer: in[ch][r][c] of size W x H -> out, returns output size
  task automatic ref_layer(int l, input byte src [NC][MD][MD], int W, int H,
                           output byte dst [NC][MD][MD], output int oW, output int oH);
    int pre [MD][MD];
    for (int oc = 0; oc < NC; oc++) for (int r = 0; r < MD; r++) for (int c = 0; c < MD; c++)
      dst[oc][r][c] = 0;
    oW = (lay[l].pool != 0) ? W / 2 : W;
    oH = (lay[l].pool != 0) ? H / 2 : H;
    for (int oc = 0; oc < lay[l].noc; oc++) begin
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          int s;
          s = 0;
          for (int kr = 0; kr < 3; kr++)
            for (int kc = 0; kc < 3; kc++) begin
              int rr, cc;
              rr = r + kr - 1; cc = c + kc - 1;
              if (rr >= 0 && rr < H && cc >= 0 && cc < W)
                for (int ic = 0; ic < NC; ic++) s += src[ic][rr][cc] * wts[l][oc][kr][kc][ic];
            end
          pre[r][c] = s;
        end
      for (int r = 0; r < oH; r++)
        for (int c = 0; c < oW; c++) begin
          int v;
          if (lay[l].pool == 0) v = pre[r][c];
          else if (lay[l].pool == 1) begin
            v = pre[2*r][2*c];
            if (pre[2*r][2*c+1] > v) v = pre[2*r][2*c+1];
            if (pre[2*r+1][2*c] > v) v = pre[2*r+1][2*c];
            if (pre[2*r+1][2*c+1] > v) v = pre[2*r+1][2*c+1];
          end else v = pre[2*r][2*c] + pre[2*r][2*c+1] + pre[2*r+1][2*c] + pre[2*r+1][2*c+1];
          dst[oc][r][c] = (v >= thi[l][oc]) ? 1 : (v < tlo[l][oc]) ? -1 : 0;
        end
    end
  endtask

  // ------------------------------------------------------------ encoding
  function automatic int digit(int t);
    return (t == 1) ? 1 : (t == -1) ? 2 : 0;
  endfunction

  // compressed byte j of a 96-trit vector given as a function of channel
  function automatic logic [7:0] cbyte(input byte v [NC], int j);
    int b, p;
    b = 0; p = 1;
    for (int k = 0; k < 5; k++) begin
      if (5*j + k < NC) b += digit(v[5*j+k]) * p;
      p *= 3;
    end
    return 8'(b);
  endfunction

  function automatic logic [159:0] cpix(input byte v [NC]);
    logic [159:0] x;
    for (int j = 0; j < PB; j++) x[8*j +: 8] = cbyte(v, j);
    return x;
  endfunction

  function automatic byte dtrit(logic [159:0] x, int ch);
    int b;
    b = int'(x[8*(ch/5) +: 8]);
    for (int k = 0; k < ch % 5; k++) b = b / 3;
    b = b % 3;
    return (b == 1) ? 8'sd1 : (b == 2) ? -8'sd1 : 8'sd0;
  endfunction

  // ------------------------------------------------------------ bus tasks
  int stalls = 0;
  task automatic dp_write(logic [19:0] a, logic [31:0] d);
    @(negedge clk);
    dreq = 1; dwe = 1; daddr = a; dwdata = d;
    #1;
    while (!dgnt) begin @(negedge clk); #1; end
    @(negedge clk);
    dreq = 0; dwe = 0;
  endtask

  task automatic dp_read(logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    dreq = 1; dwe = 0; daddr = a;
    #1;
    while (!dgnt) begin @(negedge clk); #1; end
    @(negedge clk);
    dreq = 0;
    #1;
    if (!drvalid) begin failures++; $display("no read response"); end
    d = drdata;
  endtask

  task automatic apb_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1; #1; d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic write_pixel(int b, int r, int c, logic [159:0] x);
    for (int l = 0; l < 5; l++) dp_write(20'((b << 16) | (r << 10) | (c << 4) | l), x[32*l +: 32]);
  endtask

  task automatic read_pixel(int b, int r, int c, output logic [159:0] x);
    for (int l = 0; l < 5; l++) begin
      logic [31:0] d;
      dp_read(20'((b << 16) | (r << 10) | (c << 4) | l), d);
      x[32*l +: 32] = d;
    end
  endtask

  task automatic push_tcn_host(input byte v [NC]);
    logic [159:0] x;
    x = cpix(v);
    for (int l = 0; l < 5; l++) dp_write(20'((1 << 18) | l), x[32*l +: 32]);
    tcn_q.push_back(v);
  endtask

  task automatic load_weights();
    for (int l = 0; l < NLAY; l++)
      for (int oc = 0; oc < NC; oc++) begin
        for (int kr = 0; kr < 3; kr++) begin
          logic [479:0] wd;
          for (int kc = 0; kc < 3; kc++) wd[160*kc +: 160] = cpix(wts[l][oc][kr][kc]);
          for (int ln = 0; ln < 15; ln++)
            dp_write(20'((2 << 18) | (oc << 10) | ((lay[l].wb + kr) << 4) | ln), wd[32*ln +: 32]);
        end
        dp_write(20'((2 << 18) | (oc << 10) | ((lay[l].wb + 3) << 4)),
                 {4'b0, 14'(thi[l][oc]), 14'(tlo[l][oc])});
      end
  endtask

  task automatic write_cfg();
    for (int l = 0; l < NLAY; l++) begin
      logic [31:0] w0, w1;
      w0 = '0; w1 = '0;
      w0[6:0] = 7'(lay[l].w); w0[13:7] = 7'(lay[l].h); w0[15:14] = 2'(lay[l].pool);
      w0[16] = lay[l].ib[0]; w0[17] = lay[l].ob[0]; w0[18] = lay[l].st[0]; w0[19] = lay[l].dt[0];
      w1[6:0] = 7'(lay[l].noc); w1[12:7] = 6'(lay[l].wb); w1[17:13] = 5'(lay[l].d);
      w1[22:18] = 5'(lay[l].L);
      apb_write(12'(32'h100 + 8*l), w0);
      apb_write(12'(32'h104 + 8*l), w1);
    end
    apb_write(12'h008, NLAY);
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_zero_col, n_maxpool, n_sumpool, n_gated, n_causal, n_push_dp, n_push_soc,
      n_start_reg, n_start_trig, n_irq, run_cycles;
  always @(posedge clk) if (rst_n) begin
    if (dut.i_sched.lb_shift_o && dut.i_sched.lb_zero_o) n_zero_col++;
    if (dut.i_sched.wr_en_o && dut.i_sched.pool_o == POOL_MAX) n_maxpool++;
    if (dut.i_sched.wr_en_o && dut.i_sched.pool_o == POOL_SUM) n_sumpool++;
    if (dut.lb_shift && !(&dut.ocu_en)) n_gated++;
    if (dut.tm_rd_en && dut.tm_rd_base < 0) n_causal++;
    if (dut.s_tcn_push) n_push_dp++;
    if (dut.d_tm_push) n_push_soc++;
    if (dreq && !dgnt) stalls++;
    if (irq) n_irq++;
    if (dut.busy) run_cycles++;
  end

  // ------------------------------------------------------------ test
  initial begin
    byte a0 [NC][MD][MD], a1 [NC][MD][MD], a2 [NC][MD][MD], a3 [NC][MD][MD],
         a4 [NC][MD][MD], a5 [NC][MD][MD], tin [NC][MD][MD];
    int oW, oH, exp_cycles, t_start;
    logic [31:0] st;

    lay[0] = '{w:6, h:6, pool:0, ib:0, ob:1, st:0, dt:0, noc:96, wb:0,  d:1, L:1};
    lay[1] = '{w:6, h:6, pool:1, ib:1, ob:0, st:0, dt:0, noc:40, wb:4,  d:1, L:1};
    lay[2] = '{w:3, h:3, pool:2, ib:0, ob:1, st:0, dt:0, noc:96, wb:8,  d:1, L:1};
    lay[3] = '{w:1, h:1, pool:0, ib:1, ob:0, st:0, dt:1, noc:96, wb:12, d:1, L:1};
    lay[4] = '{w:0, h:0, pool:0, ib:0, ob:0, st:1, dt:0, noc:96, wb:16, d:2, L:5};
    lay[5] = '{w:2, h:3, pool:0, ib:0, ob:1, st:0, dt:0, noc:96, wb:20, d:1, L:1};
    for (int l = 0; l < NLAY; l++)
      for (int oc = 0; oc < NC; oc++) begin
        int base;
        for (int kr = 0; kr < 3; kr++) for (int kc = 0; kc < 3; kc++) for (int ic = 0; ic < NC; ic++)
          wts[l][oc][kr][kc][ic] = 8'(rtrit(40));
        if (l == 4) // TCN kernel: middle column only
          for (int kr = 0; kr < 3; kr++) for (int ic = 0; ic < NC; ic++) begin
            wts[l][oc][kr][0][ic] = 0; wts[l][oc][kr][2][ic] = 0;
          end
        base = (lay[l].pool == 2) ? 4 : 1;
        tlo[l][oc] = base * ($urandom_range(0, 6) - 6);
        thi[l][oc] = base * ($urandom_range(0, 6) + 1);
      end

    repeat (3) @(negedge clk);
    rst_n = 1;
    write_cfg();
    load_weights();
    apb_write(12'h000, 32'd2);     // clear TCN memory
    tcn_q.delete();
    for (int i = 0; i < 2; i++) begin
      byte v [NC];
      for (int ch = 0; ch < NC; ch++) v[ch] = 8'(rtrit(50));
      push_tcn_host(v);
    end
    apb_write(12'h00C, 32'd1);     // allow the trigger line

    exp_cycles = 0;
    for (int l = 0; l < NLAY; l++) begin
      int W, H;
      W = lay[l].st ? lay[l].d : lay[l].w;
      H = lay[l].st ? (lay[l].L + lay[l].d - 1) / lay[l].d : lay[l].h;
      exp_cycles += 4 + H * (W + 2) + 3;
    end

    for (int fr = 0; fr < NFRAMES; fr++) begin
      // new input frame
      for (int ch = 0; ch < NC; ch++) for (int r = 0; r < MD; r++) for (int c = 0; c < MD; c++)
        a0[ch][r][c] = (r < 6 && c < 6) ? 8'(rtrit(50)) : 8'sd0;
      for (int r = 0; r < 6; r++) for (int c = 0; c < 6; c++) begin
        byte v [NC];
        for (int ch = 0; ch < NC; ch++) v[ch] = a0[ch][r][c];
        write_pixel(0, r, c, cpix(v));
      end
      // reference
      ref_layer(0, a0, 6, 6, a1, oW, oH);
      ref_layer(1, a1, 6, 6, a2, oW, oH);
      ref_layer(2, a2, 3, 3, a3, oW, oH);
      ref_layer(3, a3, 1, 1, a4, oW, oH);
      begin
        byte v [NC];
        for (int ch = 0; ch < NC; ch++) v[ch] = a4[ch][0][0];
        tcn_q.push_back(v);
      end
      // TCN input map: x[n], n = 0..4, the last five pushed, x[4] newest
      for (int ch = 0; ch < NC; ch++) for (int r = 0; r < MD; r++) for (int c = 0; c < MD; c++)
        tin[ch][r][c] = 0;
      for (int n = 0; n < 5; n++) begin
        int age;
        age = 4 - n;
        if (age < tcn_q.size())
          for (int ch = 0; ch < NC; ch++) tin[ch][n / 2][n % 2] = tcn_q[tcn_q.size() - 1 - age][ch];
      end
      ref_layer(4, tin, 2, 3, a4, oW, oH);
      ref_layer(5, a4, 2, 3, a5, oW, oH);

      // run
      run_cycles = 0;
      if (fr % 2 == 0) begin
        apb_write(12'h000, 32'd1);
        n_start_reg++;
      end else begin
        @(negedge clk); ext_trig = 1; @(negedge clk); ext_trig = 0;
        n_start_trig++;
      end
      // a host access during the run waits for the end
      begin
        logic [159:0] x;
        read_pixel(1, 0, 0, x);
      end
      checks++;
      if (dut.busy || n_irq != fr + 1) begin failures++; $display("frame %0d: no interrupt", fr); end
      checks++;
      if (run_cycles != exp_cycles) begin
        failures++; $display("frame %0d: %0d cycles, expected %0d", fr, run_cycles, exp_cycles);
      end
      apb_read(12'h004, st);
      checks++; if (st[1:0] != 2'b10) failures++;

      // compare L4 output (half 0) and L5 output (half 1), 2 x 3 maps
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < 3; r++) for (int c = 0; c < 2; c++) begin
          logic [159:0] x;
          read_pixel(b, r, c, x);
          for (int ch = 0; ch < NC; ch++) begin
            byte e;
            e = (b == 0) ? a4[ch][r][c] : a5[ch][r][c];
            checks++;
            if (dtrit(x, ch) != e) begin
              failures++;
              if (failures < 12) $display("frame %0d L%0d (%0d,%0d) ch %0d: got %0d exp %0d",
                                          fr, 4 + b, r, c, ch, dtrit(x, ch), e);
            end
          end
        end
    end

    $display("mechanisms: zero_col=%0d maxpool=%0d sumpool=%0d gated=%0d causal=%0d push_dp=%0d push_soc=%0d stalls=%0d start_reg=%0d start_trig=%0d irq=%0d",
             n_zero_col, n_maxpool, n_sumpool, n_gated, n_causal, n_push_dp, n_push_soc, stalls,
             n_start_reg, n_start_trig, n_irq);
    checks += 11;
    if (n_zero_col == 0) failures++;
    if (n_maxpool == 0) failures++;
    if (n_sumpool == 0) failures++;
    if (n_gated == 0) failures++;
    if (n_causal == 0) failures++;
    if (n_push_dp == 0) failures++;
    if (n_push_soc == 0) failures++;
    if (stalls == 0) failures++;
    if (n_start_reg == 0) failures++;
    if (n_start_trig == 0) failures++;
    if (n_irq != NFRAMES) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
