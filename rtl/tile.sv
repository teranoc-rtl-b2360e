// Tile (Hier-L0): the base block of the cluster, M cores' ports and N L1 SPM banks.
//
// Requests: each core request is steered (tile_req_steer) either into the core-to-bank request
// crossbar of this tile or to one of the 1+K outgoing remote request ports (req_o). The
// core-to-bank crossbar has M+1+K initiators, the M cores and the 1+K incoming remote ports
// (req_i), and N targets, the banks; the bank is selected by address bits [2 +: log2 N] (word
// interleaving). Each bank records which initiator its request came from.
// Responses: a response crossbar with N+1+K initiators (the banks and the incoming remote
// response ports rsp_i) and M+1+K targets (the cores and the outgoing response ports rsp_o)
// returns each bank response the way its request came, and each incoming remote response to the
// core named in it. Port 0 of each remote set connects to the other tiles of the group, ports
// 1..K to the K mesh routers (the last NumRo of them read-only).
// Every outgoing remote port, request and response, has a spill register, so a request to
// another tile of the group costs 1 cycle more each way. Read-only ports use a spill register of
// the narrow request type; their write fields leave the tile as zeros.
//
// Timing: a load to a bank of this tile issued in cycle t is answered in cycle t+1. The core
// response ports have a ready; the cores of the cluster always accept.
//
// From the TeraNoC paper: 4 cores, 16 banks, single-cycle local access, spill registers at the
// outgoing tile boundary, 1 + K remote ports. Design choices: remote requests share the bank
// crossbar with the cores; the response crossbar's winner index (xrsp_src) is not needed because
// each response carries its own return information, so that output is left unused on purpose.
module tile import teranoc_pkg::*; #(
  parameter int unsigned NumCores  = NumCoresPerTile,
  parameter int unsigned NumBanks  = NumBanksPerTile,
  parameter int unsigned NumTiles  = NumTilesPerGroup,
  parameter int unsigned NumGrps   = NumGroups,
  parameter int unsigned NumRouter = NumRouterPorts,
  parameter int unsigned NumRo     = NumRoPorts,
  parameter int unsigned NumWords  = BankWords,
  localparam int unsigned NumPorts = 1 + NumRouter
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [GroupIdWidth-1:0] group_id_i,
  input  logic [TileIdWidth-1:0]  tile_id_i,
  // Core ports
  input  logic [NumCores-1:0]     core_req_valid_i,
  output logic [NumCores-1:0]     core_req_ready_o,
  input  tcdm_req_t               core_req_i       [NumCores],
  output logic [NumCores-1:0]     core_rsp_valid_o,
  input  logic [NumCores-1:0]     core_rsp_ready_i,
  output tcdm_rsp_t               core_rsp_o       [NumCores],
  // Outgoing remote requests
  output logic [NumPorts-1:0]     req_o_valid_o,
  input  logic [NumPorts-1:0]     req_o_ready_i,
  output tcdm_req_t               req_o_o          [NumPorts],
  // Incoming remote requests
  input  logic [NumPorts-1:0]     req_i_valid_i,
  output logic [NumPorts-1:0]     req_i_ready_o,
  input  tcdm_req_t               req_i_i          [NumPorts],
  // Outgoing remote responses
  output logic [NumPorts-1:0]     rsp_o_valid_o,
  input  logic [NumPorts-1:0]     rsp_o_ready_i,
  output tcdm_rsp_t               rsp_o_o          [NumPorts],
  // Incoming remote responses
  input  logic [NumPorts-1:0]     rsp_i_valid_i,
  output logic [NumPorts-1:0]     rsp_i_ready_o,
  input  tcdm_rsp_t               rsp_i_i          [NumPorts]
);

  localparam int unsigned NumRw     = NumRouter - NumRo;
  localparam int unsigned NumReqIn  = NumCores + NumPorts;  // core-to-bank initiators
  localparam int unsigned NumRspIn  = NumBanks + NumPorts;  // response initiators
  localparam int unsigned NumRspOut = NumCores + NumPorts;  // response targets
  localparam int unsigned BankSelW  = (NumBanks > 1) ? $clog2(NumBanks) : 1;
  localparam int unsigned RetW      = $clog2(NumReqIn);
  localparam int unsigned RspSelW   = $clog2(NumRspOut);
  localparam int unsigned RowOff    = 2 + $clog2(NumBanks) + $clog2(NumTiles) + $clog2(NumGrps);
  localparam int unsigned RowW      = $clog2(NumWords);

  typedef struct packed {
    logic [RetW-1:0] ret;   // initiator index in the core-to-bank crossbar = response target
    logic            wen;
    ini_t            ini;
  } bank_meta_t;

  // ---------------------------------------------------------------------------------------------
  // Request steering and outgoing request spill registers
  // ---------------------------------------------------------------------------------------------
  logic [NumCores-1:0] local_valid, local_ready;
  logic [NumPorts-1:0] out_req_valid, out_req_ready;
  tcdm_req_t           out_req [NumPorts];

  tile_req_steer #(
    .NumCores (NumCores), .NumBanks (NumBanks), .NumTiles (NumTiles), .NumGrps (NumGrps),
    .NumRouter(NumRouter), .NumRo (NumRo)
  ) i_steer (
    .clk_i, .rst_ni, .group_id_i, .tile_id_i,
    .core_valid_i  (core_req_valid_i),
    .core_ready_o  (core_req_ready_o),
    .core_req_i    (core_req_i),
    .local_valid_o (local_valid),
    .local_ready_i (local_ready),
    .port_valid_o  (out_req_valid),
    .port_ready_i  (out_req_ready),
    .port_req_o    (out_req)
  );

  for (genvar p = 0; p < NumPorts; p++) begin : gen_req_spill
    if (p >= 1 + NumRw) begin : gen_ro
      tcdm_ro_req_t ro_out;
      spill_register #(.T(tcdm_ro_req_t)) i_spill (
        .clk_i, .rst_ni,
        .in_valid_i  (out_req_valid[p]),
        .in_ready_o  (out_req_ready[p]),
        .in_data_i   (to_ro(out_req[p].addr, out_req[p].ini)),
        .out_valid_o (req_o_valid_o[p]),
        .out_ready_i (req_o_ready_i[p]),
        .out_data_o  (ro_out)
      );
      assign req_o_o[p] = from_ro(ro_out);
    end else begin : gen_rw
      spill_register #(.T(tcdm_req_t)) i_spill (
        .clk_i, .rst_ni,
        .in_valid_i  (out_req_valid[p]),
        .in_ready_o  (out_req_ready[p]),
        .in_data_i   (out_req[p]),
        .out_valid_o (req_o_valid_o[p]),
        .out_ready_i (req_o_ready_i[p]),
        .out_data_o  (req_o_o[p])
      );
    end
  end

  // ---------------------------------------------------------------------------------------------
  // Core-to-bank request crossbar and banks
  // ---------------------------------------------------------------------------------------------
  logic [NumReqIn-1:0] xreq_valid, xreq_ready;
  tcdm_req_t           xreq_data [NumReqIn];
  logic [BankSelW-1:0] xreq_sel  [NumReqIn];
  logic [NumBanks-1:0] bank_valid, bank_ready;
  tcdm_req_t           bank_req  [NumBanks];
  logic [RetW-1:0]     bank_src  [NumBanks];

  for (genvar i = 0; i < NumReqIn; i++) begin : gen_xreq_in
    if (i < NumCores) begin : gen_core
      assign xreq_valid[i]  = local_valid[i];
      assign local_ready[i] = xreq_ready[i];
      assign xreq_data[i]   = core_req_i[i];
    end else begin : gen_remote
      assign xreq_valid[i]                = req_i_valid_i[i-NumCores];
      assign req_i_ready_o[i-NumCores]    = xreq_ready[i];
      assign xreq_data[i]                 = req_i_i[i-NumCores];
    end
    assign xreq_sel[i] = BankSelW'((xreq_data[i].addr >> 2) % NumBanks);
  end

  log_xbar #(.NumIn(NumReqIn), .NumOut(NumBanks), .T(tcdm_req_t)) i_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i  (xreq_valid),
    .in_ready_o  (xreq_ready),
    .in_data_i   (xreq_data),
    .in_sel_i    (xreq_sel),
    .out_valid_o (bank_valid),
    .out_ready_i (bank_ready),
    .out_data_o  (bank_req),
    .out_src_o   (bank_src)
  );

  logic [NumRspIn-1:0] xrsp_valid, xrsp_ready;
  tcdm_rsp_t           xrsp_data [NumRspIn];
  logic [RspSelW-1:0]  xrsp_sel  [NumRspIn];

  for (genvar b = 0; b < NumBanks; b++) begin : gen_bank
    bank_meta_t  meta_in, meta_out;
    logic [31:0] rdata;
    assign meta_in = '{ret: bank_src[b], wen: bank_req[b].wen, ini: bank_req[b].ini};

    spm_bank #(.NumWords(NumWords), .meta_t(bank_meta_t)) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i (bank_valid[b]),
      .req_ready_o (bank_ready[b]),
      .req_row_i   (RowW'(bank_req[b].addr >> RowOff)),
      .req_wen_i   (bank_req[b].wen),
      .req_be_i    (bank_req[b].be),
      .req_wdata_i (bank_req[b].wdata),
      .req_meta_i  (meta_in),
      .rsp_valid_o (xrsp_valid[b]),
      .rsp_ready_i (xrsp_ready[b]),
      .rsp_rdata_o (rdata),
      .rsp_meta_o  (meta_out)
    );

    assign xrsp_data[b] = '{rdata: rdata, wen: meta_out.wen, ini: meta_out.ini};
    assign xrsp_sel[b]  = RspSelW'(meta_out.ret);
  end

  // ---------------------------------------------------------------------------------------------
  // Response crossbar and outgoing response spill registers
  // ---------------------------------------------------------------------------------------------
  for (genvar p = 0; p < NumPorts; p++) begin : gen_rsp_in
    assign xrsp_valid[NumBanks+p] = rsp_i_valid_i[p];
    assign rsp_i_ready_o[p]       = xrsp_ready[NumBanks+p];
    assign xrsp_data[NumBanks+p]  = rsp_i_i[p];
    assign xrsp_sel[NumBanks+p]   = RspSelW'(rsp_i_i[p].ini.core);
  end

  logic [NumRspOut-1:0] xrsp_out_valid, xrsp_out_ready;
  tcdm_rsp_t            xrsp_out [NumRspOut];
  logic [$clog2(NumRspIn)-1:0] xrsp_src [NumRspOut];

  log_xbar #(.NumIn(NumRspIn), .NumOut(NumRspOut), .T(tcdm_rsp_t)) i_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i  (xrsp_valid),
    .in_ready_o  (xrsp_ready),
    .in_data_i   (xrsp_data),
    .in_sel_i    (xrsp_sel),
    .out_valid_o (xrsp_out_valid),
    .out_ready_i (xrsp_out_ready),
    .out_data_o  (xrsp_out),
    .out_src_o   (xrsp_src)
  );

  for (genvar c = 0; c < NumCores; c++) begin : gen_core_rsp
    assign core_rsp_valid_o[c] = xrsp_out_valid[c];
    assign xrsp_out_ready[c]   = core_rsp_ready_i[c];
    assign core_rsp_o[c]       = xrsp_out[c];
  end

  for (genvar p = 0; p < NumPorts; p++) begin : gen_rsp_spill
    spill_register #(.T(tcdm_rsp_t)) i_spill (
      .clk_i, .rst_ni,
      .in_valid_i  (xrsp_out_valid[NumCores+p]),
      .in_ready_o  (xrsp_out_ready[NumCores+p]),
      .in_data_i   (xrsp_out[NumCores+p]),
      .out_valid_o (rsp_o_valid_o[p]),
      .out_ready_i (rsp_o_ready_i[p]),
      .out_data_o  (rsp_o_o[p])
    );
  end

endmodule
