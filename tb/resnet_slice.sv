// resnet_slice: one run of a ResNet-50 layer slice on an accelerator of
// DIM x DIM (default scratchpad and accumulator sizes), driven the way a
// host driver would tile it. The layer is the first 1x1 convolution of a
// conv2_x bottleneck block (64 input channels -> 64 output channels), taken
// over an 8x8 patch of the 56x56 feature map: a GEMM of M = 64 pixels,
// K = 64, N = 64. The activations are one client's blinded data (tag 3),
// the weights are the service's public model. The host has laid both out
// tile by tile (im2col is the identity for a 1x1 convolution): A as K/DIM
// tiles of M rows, W as (K/DIM)x(N/DIM) tiles of DIM rows. For every output
// tile it issues K/DIM PRELOAD/COMPUTE pairs, the first overwriting and the
// others accumulating into the same accumulator rows, then one MVOUT with
// ReLU and a scale of 2^-6. Every output byte and tag is compared with the
// layer computed here, and the number of rows pushed through the array and
// accumulated is checked. Reports checks and failures on its ports and
// raises done at the end; the cycle count is printed.
module resnet_slice
  import dolma_pkg::*;
#(
  parameter int DIM = 16
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int M = 64, K = 64, N = 64, KT = K / DIM, NT = N / DIM;
  localparam int SP_ROWS = 256 * 1024 / (4 * DIM);
  localparam int SHIFT = 6;
  logic rst_n = 0;

  logic cv, cr, busy, fault;
  fault_e cause;
  logic [6:0] cf;
  logic [XLEN-1:0] c1, c2;
  logic qv, qr, pv, pr, wv, wr;
  logic [XLEN-1:0] qa, wa;
  logic [63:0] pd, wd;
  tag_t pt, wt;
  logic tlbv;
  logic [XLEN-1:0] tlbpte;

  dolma_top #(.DIM(DIM)) u_dut (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid_i(cv), .cmd_ready_o(cr), .cmd_funct_i(cf), .cmd_rs1_i(c1), .cmd_rs1_tag_i('0),
    .cmd_rs2_i(c2), .cmd_rs2_tag_i('0), .busy_o(busy), .fault_o(fault), .fault_cause_o(cause),
    .mem_rd_req_valid_o(qv), .mem_rd_req_ready_i(qr), .mem_rd_req_addr_o(qa),
    .mem_rd_resp_valid_i(pv), .mem_rd_resp_ready_o(pr), .mem_rd_resp_data_i(pd), .mem_rd_resp_tag_i(pt),
    .mem_wr_req_valid_o(wv), .mem_wr_req_ready_i(wr), .mem_wr_req_addr_o(wa),
    .mem_wr_req_data_o(wd), .mem_wr_req_tag_o(wt),
    .ptw_valid_i(1'b0), .ptw_pte_i('0), .ptw_tag_i('0),
    .tlb_refill_valid_o(tlbv), .tlb_refill_pte_o(tlbpte));

  tagged_mem_model u_mem (
    .clk(clk), .rd_req_valid_i(qv), .rd_req_ready_o(qr), .rd_req_addr_i(qa),
    .rd_resp_valid_o(pv), .rd_resp_ready_i(pr), .rd_resp_data_o(pd), .rd_resp_tag_o(pt),
    .wr_req_valid_i(wv), .wr_req_ready_o(wr), .wr_req_addr_i(wa), .wr_req_data_i(wd),
    .wr_req_tag_i(wt));

  logic signed [7:0] act [M][K];     // activations, pixel x input channel
  logic signed [7:0] wgt [K][N];     // 1x1 kernel, input x output channel
  localparam tag_t CLIENT = 8'd3;

  localparam longint A_AT = 64'h10_0000, W_AT = 64'h20_0000, O_AT = 64'h30_0000;
  // host layout: A tile kt = M rows of DIM bytes; W tile (kt,nt) = DIM rows
  function automatic longint a_addr(int kt, int m); return A_AT + (kt * M + m) * DIM; endfunction
  function automatic longint w_addr(int kt, int nt, int k); return W_AT + ((kt * NT + nt) * DIM + k) * DIM; endfunction

  task automatic poke_row(longint addr, logic [DIM*8-1:0] row, tag_t t);
    for (int b = 0; b < DIM / 8; b++) u_mem.poke(addr + b * 8, row[b*64 +: 64], t);
  endtask

  task automatic cmd(logic [6:0] f, logic [XLEN-1:0] r1, logic [XLEN-1:0] r2);
    @(negedge clk);
    cv = 1; cf = f; c1 = r1; c2 = r2;
    @(posedge clk);
    while (!cr) @(posedge clk);
    @(negedge clk);
    cv = 0;
  endtask

  function automatic logic [XLEN-1:0] rows_field(int addr, int n);
    return XLEN'(addr) | (XLEN'(n) << 16);
  endfunction

  int n_pushed = 0, n_accum = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_exec.push) n_pushed++;
    if (u_dut.exw_valid && u_dut.exw_accum) n_accum++;
  end

  initial begin
    int cyc, quiet;
    checks = 0; failures = 0; done = 0;
    cv = 0; cf = 0; c1 = 0; c2 = 0;
    foreach (act[m, k]) act[m][k] = 8'($urandom_range(0, 40)) - 8;   // post-ReLU-like, some negatives
    foreach (wgt[k, n]) wgt[k][n] = 8'($urandom_range(0, 30)) - 15;
    for (int kt = 0; kt < KT; kt++)
      for (int m = 0; m < M; m++) begin
        logic [DIM*8-1:0] r;
        for (int j = 0; j < DIM; j++) r[j*8 +: 8] = act[m][kt * DIM + j];
        poke_row(a_addr(kt, m), r, CLIENT);
      end
    for (int kt = 0; kt < KT; kt++)
      for (int nt = 0; nt < NT; nt++)
        for (int k = 0; k < DIM; k++) begin
          logic [DIM*8-1:0] r;
          for (int j = 0; j < DIM; j++) r[j*8 +: 8] = wgt[kt * DIM + k][nt * DIM + j];
          poke_row(w_addr(kt, nt, k), r, 8'd0);
        end
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!u_dut.sys_ready) @(negedge clk);
    cyc = 0;
    fork
      forever @(posedge clk) cyc++;
    join_none

    // move in: A tiles to bank 0, weight tiles to bank 1
    cmd(FN_MVIN, A_AT, rows_field(0, KT * M));
    cmd(FN_MVIN, W_AT, rows_field(SP_ROWS, KT * NT * DIM));
    cmd(FN_CONFIG, 64'(SHIFT << 8) | 64'd1, 0);                   // ReLU, scale 2^-6
    for (int nt = 0; nt < NT; nt++) begin
      for (int kt = 0; kt < KT; kt++) begin
        cmd(FN_PRELOAD, SP_ROWS + (kt * NT + nt) * DIM,
            (kt == 0 ? 64'd0 : 64'h4000_0000_0000_0000) | 64'(nt * M));
        cmd(FN_COMPUTE, rows_field(kt * M, M), 64'h8000_0000_0000_0000);
      end
      cmd(FN_MVOUT, O_AT + nt * M * DIM, rows_field(nt * M, M));
    end
    quiet = 0;
    while (quiet < 4) begin
      @(negedge clk);
      quiet = busy ? 0 : quiet + 1;
    end

    // reference layer
    for (int nt = 0; nt < NT; nt++)
      for (int m = 0; m < M; m++)
        for (int b = 0; b < DIM / 8; b++) begin
          logic [63:0] e;
          longint ad;
          for (int q = 0; q < 8; q++) begin
            int v, n;
            n = nt * DIM + b * 8 + q;
            v = 0;
            for (int k = 0; k < K; k++) v += int'(act[m][k]) * int'(wgt[k][n]);
            v = (v + (1 << (SHIFT - 1))) >>> SHIFT;
            if (v < 0) v = 0;
            if (v > 127) v = 127;
            e[q*8 +: 8] = 8'(v);
          end
          ad = O_AT + (nt * M + m) * DIM + b * 8;
          checks++;
          if (u_mem.peek(ad) !== e || u_mem.peek_tag(ad) !== CLIENT) begin
            failures++;
            $display("FAIL out tile %0d pixel %0d beat %0d: %h tag %0d, expected %h tag %0d",
                     nt, m, b, u_mem.peek(ad), u_mem.peek_tag(ad), e, CLIENT);
          end
        end
    checks++;
    if (fault) begin failures++; $display("FAIL fault raised, cause %0d", cause); end
    checks++;
    if (n_pushed != NT * KT * M || n_accum != NT * (KT - 1) * M) begin
      failures++; $display("FAIL rows pushed %0d, accumulated %0d", n_pushed, n_accum);
    end
    $display("layer slice M=%0d K=%0d N=%0d on %0dx%0d: %0d cycles, %0d array rows (%0d%% of cycles)",
             M, K, N, DIM, DIM, cyc, n_pushed, 100 * n_pushed / cyc);
    done = 1;
  end
endmodule
