// dsmc_building_block: one building block of the DSMC, 16 master ports and
// 16 memory banks joined by a 2-ary 4-fly network, plus the speed-up links to
// its sister block.
//
// Four levels of eight radix-2 switches sit between the masters and the
// banks: RSWH0 (two master ports each, address decoding, directed
// randomization), then RSWH1, RSWH2 and RSWH3, each carrying two independent
// lanes (dsmc_rswh_dual). Switch j of a level connects to the two switches of
// the next level whose index differs from j only in one bit - bit 0 between
// RSWH0 and RSWH1, bit 1 between RSWH1 and RSWH2, bit 2 between RSWH2 and
// RSWH3 - and RSWH3 j serves banks 2j and 2j+1. Requests are routed by bank
// bits 1, 2, 3 and 0 at the four levels; responses take the mirror path,
// routed by the bits of the master index. This is the butterfly wiring drawn
// for RSWH0..RSWH3 in the paper's building-block figure; which bit each level
// resolves is this design's choice.
//
// Speed-up: beats for the sister block leave RSWH0 i on speed-up link
// 2i+p (p = bank bit 1) and enter the sister's RSWH1 (i with bit 0 = p) on
// lane 1, input i[0]. Responses to sister masters leave RSWH1 j lane 1 on link
// 2j+p towards the sister's RSWH0 (j with bit 0 = p). The two blocks use the
// same numbering, so the top connects out to in unchanged.
//
// The block has no parameter that differs between the two instances: its
// identity comes from the `bb_id` input, so one layout serves both.
// L3_SLICE gives, per RSWH2 switch, the number of register slices (0..3) in
// front of it on the RSWH1-RSWH2 links, both directions; the default is none.
module dsmc_building_block
  import dsmc_pkg::*;
#(
  parameter logic [N_SW-1:0][1:0] L3_SLICE = '0,
  parameter int unsigned          ROWS     = BANK_ROWS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               bb_id,
  // master ports
  input  logic  [BB_MASTERS-1:0]             cmd_valid,
  output logic  [BB_MASTERS-1:0]             cmd_ready,
  input  cmd_t  [BB_MASTERS-1:0]             cmd,
  input  logic  [BB_MASTERS-1:0]             wvalid,
  output logic  [BB_MASTERS-1:0]             wready,
  input  logic  [BB_MASTERS-1:0][DATA_W-1:0] wdata,
  output logic  [BB_MASTERS-1:0]             mrsp_valid,
  input  logic  [BB_MASTERS-1:0]             mrsp_ready,
  output mrsp_t [BB_MASTERS-1:0]             mrsp,
  // speed-up request links: out to the sister block, in from it
  output logic  [2*N_SW-1:0]                 suq_out_valid,
  input  logic  [2*N_SW-1:0]                 suq_out_ready,
  output req_t  [2*N_SW-1:0]                 suq_out,
  input  logic  [2*N_SW-1:0]                 suq_in_valid,
  output logic  [2*N_SW-1:0]                 suq_in_ready,
  input  req_t  [2*N_SW-1:0]                 suq_in,
  // speed-up response links
  output logic  [2*N_SW-1:0]                 sup_out_valid,
  input  logic  [2*N_SW-1:0]                 sup_out_ready,
  output rsp_t  [2*N_SW-1:0]                 sup_out,
  input  logic  [2*N_SW-1:0]                 sup_in_valid,
  output logic  [2*N_SW-1:0]                 sup_in_ready,
  input  rsp_t  [2*N_SW-1:0]                 sup_in
);
  // ---- nets ---------------------------------------------------------------
  // master port <-> RSWH0
  logic  [BB_MASTERS-1:0] b_v, b_r, p_v, p_r;
  beat_t [BB_MASTERS-1:0] b_d;
  rsp_t  [BB_MASTERS-1:0] p_d;
  // RSWH0 request outputs / response inputs, [switch][port]
  logic  [N_SW-1:0][3:0]  q0_v, q0_r, a0_v, a0_r;
  req_t  [N_SW-1:0][3:0]  q0_d;
  rsp_t  [N_SW-1:0][3:0]  a0_d;
  // dual switches, [level 1..3 -> 0..2][switch][lane][port]
  logic  [2:0][N_SW-1:0][1:0][1:0] qi_v, qi_r, qo_v, qo_r, ai_v, ai_r, ao_v, ao_r;
  req_t  [2:0][N_SW-1:0][1:0][1:0] qi_d, qo_d;
  rsp_t  [2:0][N_SW-1:0][1:0][1:0] ai_d, ao_d;
  // banks, [bank][lane]
  logic  [BB_BANKS-1:0][1:0] kq_v, kq_r, kp_v, kp_r;
  req_t  [BB_BANKS-1:0][1:0] kq_d;
  rsp_t  [BB_BANKS-1:0][1:0] kp_d;

  // ---- master ports ------------------------------------------------------
  for (genvar m = 0; m < BB_MASTERS; m++) begin : g_mp
    dsmc_master_port u_mp (
      .clk, .rst_n,
      .mid        ({bb_id, 4'(m)}),
      .cmd_valid  (cmd_valid[m]),
      .cmd_ready  (cmd_ready[m]),
      .cmd        (cmd[m]),
      .wvalid     (wvalid[m]),
      .wready     (wready[m]),
      .wdata      (wdata[m]),
      .mrsp_valid (mrsp_valid[m]),
      .mrsp_ready (mrsp_ready[m]),
      .mrsp       (mrsp[m]),
      .beat_valid (b_v[m]),
      .beat_ready (b_r[m]),
      .beat       (b_d[m]),
      .rsp_valid  (p_v[m]),
      .rsp_ready  (p_r[m]),
      .rsp        (p_d[m])
    );
  end

  // ---- level 1: RSWH0 ----------------------------------------------------
  for (genvar i = 0; i < N_SW; i++) begin : g_l1
    dsmc_rswh0 u_sw (
      .clk, .rst_n, .bb_id,
      .beat_valid   (b_v[2*i +: 2]),
      .beat_ready   (b_r[2*i +: 2]),
      .beat         (b_d[2*i +: 2]),
      .req_valid    (q0_v[i]),
      .req_ready    (q0_r[i]),
      .req          (q0_d[i]),
      .rsp_in_valid (a0_v[i]),
      .rsp_in_ready (a0_r[i]),
      .rsp_in       (a0_d[i]),
      .rsp_valid    (p_v[2*i +: 2]),
      .rsp_ready    (p_r[2*i +: 2]),
      .rsp          (p_d[2*i +: 2])
    );

    for (genvar p = 0; p < 2; p++) begin : g_p
      localparam int J = (i & ~1) | p;   // level-2 switch reached
      // local request: RSWH0 i port p -> RSWH1 J lane 0 input i[0]
      assign qi_v[0][J][0][i & 1] = q0_v[i][p];
      assign qi_d[0][J][0][i & 1] = q0_d[i][p];
      assign q0_r[i][p]           = qi_r[0][J][0][i & 1];
      // speed-up request out: link 2i+p
      assign suq_out_valid[2*i+p] = q0_v[i][2+p];
      assign suq_out[2*i+p]       = q0_d[i][2+p];
      assign q0_r[i][2+p]         = suq_out_ready[2*i+p];
      // speed-up request in: link 2i+p from sister RSWH0 i -> RSWH1 J lane 1
      assign qi_v[0][J][1][i & 1] = suq_in_valid[2*i+p];
      assign qi_d[0][J][1][i & 1] = suq_in[2*i+p];
      assign suq_in_ready[2*i+p]  = qi_r[0][J][1][i & 1];
      // local response: RSWH1 J lane 0 output (i[0]) -> RSWH0 i input J[0]
      // speed-up response in: sister RSWH1 j lane 1 output on link 2j+q,
      // q = i[0], j = (i & ~1) | p, into RSWH0 i input 2 + j[0]
    end
    for (genvar j0 = 0; j0 < 2; j0++) begin : g_a
      localparam int J = (i & ~1) | j0;
      assign a0_v[i][j0]        = ao_v[0][J][0][i & 1];
      assign a0_d[i][j0]        = ao_d[0][J][0][i & 1];
      assign ao_r[0][J][0][i & 1] = a0_r[i][j0];
      assign a0_v[i][2+j0]      = sup_in_valid[2*J + (i & 1)];
      assign a0_d[i][2+j0]      = sup_in[2*J + (i & 1)];
      assign sup_in_ready[2*J + (i & 1)] = a0_r[i][2+j0];
    end
  end

  // speed-up responses leave RSWH1 j lane 1 on link 2j+p
  for (genvar j = 0; j < N_SW; j++) begin : g_sup
    for (genvar p = 0; p < 2; p++) begin : g_p
      assign sup_out_valid[2*j+p] = ao_v[0][j][1][p];
      assign sup_out[2*j+p]       = ao_d[0][j][1][p];
      assign ao_r[0][j][1][p]     = sup_out_ready[2*j+p];
    end
  end

  // ---- levels 2..4: RSWH1, RSWH2, RSWH3 -----------------------------------
  for (genvar lv = 0; lv < 3; lv++) begin : g_lv
    for (genvar j = 0; j < N_SW; j++) begin : g_sw
      dsmc_rswh_dual #(.LEVEL(lv + 1)) u_sw (
        .clk, .rst_n,
        .req_in_valid  (qi_v[lv][j]),
        .req_in_ready  (qi_r[lv][j]),
        .req_in        (qi_d[lv][j]),
        .req_out_valid (qo_v[lv][j]),
        .req_out_ready (qo_r[lv][j]),
        .req_out       (qo_d[lv][j]),
        .rsp_in_valid  (ai_v[lv][j]),
        .rsp_in_ready  (ai_r[lv][j]),
        .rsp_in        (ai_d[lv][j]),
        .rsp_out_valid (ao_v[lv][j]),
        .rsp_out_ready (ao_r[lv][j]),
        .rsp_out       (ao_d[lv][j])
      );
    end
  end

  // RSWH1 -> RSWH2 (bit 1), with optional slices; RSWH2 -> RSWH3 (bit 2)
  for (genvar s = 0; s < 2; s++) begin : g_link
    for (genvar j = 0; j < N_SW; j++) begin : g_sw
      for (genvar l = 0; l < 2; l++) begin : g_l
        for (genvar p = 0; p < 2; p++) begin : g_p
          localparam int B  = s + 1;                       // index bit exchanged
          localparam int T  = (j & ~(1 << B)) | (p << B);  // next switch
          localparam int TP = (j >> B) & 1;                // its input port
          localparam int NS = (s == 0) ? int'(L3_SLICE[T]) : 0;
          if (NS == 0) begin : g_direct
            assign qi_v[s+1][T][l][TP] = qo_v[s][j][l][p];
            assign qi_d[s+1][T][l][TP] = qo_d[s][j][l][p];
            assign qo_r[s][j][l][p]    = qi_r[s+1][T][l][TP];
            assign ai_v[s][j][l][p]    = ao_v[s+1][T][l][TP];
            assign ai_d[s][j][l][p]    = ao_d[s+1][T][l][TP];
            assign ao_r[s+1][T][l][TP] = ai_r[s][j][l][p];
          end else begin : g_slice
            dsmc_reg_slice #(.W(REQ_W), .STAGES(NS)) u_q (
              .clk, .rst_n,
              .in_valid  (qo_v[s][j][l][p]),
              .in_ready  (qo_r[s][j][l][p]),
              .in_data   (qo_d[s][j][l][p]),
              .out_valid (qi_v[s+1][T][l][TP]),
              .out_ready (qi_r[s+1][T][l][TP]),
              .out_data  (qi_d[s+1][T][l][TP])
            );
            dsmc_reg_slice #(.W(RSP_W), .STAGES(NS)) u_a (
              .clk, .rst_n,
              .in_valid  (ao_v[s+1][T][l][TP]),
              .in_ready  (ao_r[s+1][T][l][TP]),
              .in_data   (ao_d[s+1][T][l][TP]),
              .out_valid (ai_v[s][j][l][p]),
              .out_ready (ai_r[s][j][l][p]),
              .out_data  (ai_d[s][j][l][p])
            );
          end
        end
      end
    end
  end

  // ---- RSWH3 <-> banks ---------------------------------------------------
  for (genvar j = 0; j < N_SW; j++) begin : g_bk
    for (genvar l = 0; l < 2; l++) begin : g_l
      for (genvar p = 0; p < 2; p++) begin : g_p
        assign kq_v[2*j+p][l]  = qo_v[2][j][l][p];
        assign kq_d[2*j+p][l]  = qo_d[2][j][l][p];
        assign qo_r[2][j][l][p] = kq_r[2*j+p][l];
        assign ai_v[2][j][l][p] = kp_v[2*j+p][l];
        assign ai_d[2][j][l][p] = kp_d[2*j+p][l];
        assign kp_r[2*j+p][l]  = ai_r[2][j][l][p];
      end
    end
  end

  for (genvar b = 0; b < BB_BANKS; b++) begin : g_bank
    dsmc_bank #(.ROWS(ROWS)) u_bank (
      .clk, .rst_n,
      .req_valid (kq_v[b]),
      .req_ready (kq_r[b]),
      .req       (kq_d[b]),
      .rsp_valid (kp_v[b]),
      .rsp_ready (kp_r[b]),
      .rsp       (kp_d[b])
    );
  end
endmodule
