// Traffic model of the cluster's cores, for the cluster testbenches.
//
// Stands in for the NumAll cores on the cluster's core ports. Each model core keeps up to
// MaxOutstanding transactions in flight, tagged with a transaction id, and accepts every
// response at once. The run has three phases:
//  1. Latency: core 0 alone loads one word from its own tile, from another tile of its group, and
//     from every other group; each round trip is measured and compared with 1, 3 and 3 + 4*R
//     cycles (R = routers passed = Manhattan distance + 1).
//  2. Fill: every core c stores the words c + n*NumAll, n < WordsPerCore, with a value derived
//     from the word index; every store acknowledgment is checked.
//  3. Read: every core loads ReadsPerCore words chosen at random from all words stored in phase 2
//     and checks each value.
// It counts local, intra-group and inter-group requests, and cycles in which a core's request
// waited (valid without ready). done_o rises when all phases are complete.
// The 1- and 3-cycle figures and the 8 outstanding transactions per core follow the TeraNoC
// paper; the 3 + 4*R formula, the access pattern and the stored values are this design's choice.
module core_traffic import teranoc_pkg::*; #(
  parameter int unsigned NumGrps      = 4,
  parameter int unsigned DimY         = 2,
  parameter int unsigned NumTiles     = 4,
  parameter int unsigned NumCores     = 2,
  parameter int unsigned NumBanks     = 4,
  parameter int unsigned WordsPerCore = 4,
  parameter int unsigned ReadsPerCore = 16,
  localparam int unsigned NumAll      = NumGrps * NumTiles * NumCores
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  output logic [NumAll-1:0] req_valid_o,
  input  logic [NumAll-1:0] req_ready_i,
  output tcdm_req_t         req_o       [NumAll],
  input  logic [NumAll-1:0] rsp_valid_i,
  output logic [NumAll-1:0] rsp_ready_o,
  input  tcdm_rsp_t         rsp_i       [NumAll],
  output logic              done_o,
  output int unsigned       checks_o,
  output int unsigned       failures_o,
  output int unsigned       n_local_o,
  output int unsigned       n_intra_o,
  output int unsigned       n_inter_o,
  output int unsigned       n_stall_o,
  output int unsigned       n_lat_checked_o
);

  localparam int unsigned NumTx = MaxOutstanding;
  localparam int unsigned TotalWords = NumAll * WordsPerCore;

  function automatic logic [31:0] word_value(int unsigned w);
    return (w * 32'h9E3779B1) ^ 32'h5BD1E995;
  endfunction
  function automatic int unsigned word_group(int unsigned w);
    return (w / (NumBanks * NumTiles)) % NumGrps;
  endfunction
  function automatic int unsigned word_tile(int unsigned w);
    return (w / NumBanks) % NumTiles;
  endfunction
  function automatic int unsigned core_group(int unsigned c);
    return c / (NumTiles * NumCores);
  endfunction
  function automatic int unsigned core_tile(int unsigned c);
    return (c / NumCores) % NumTiles;
  endfunction
  function automatic int unsigned abs_diff(int unsigned a, int unsigned b);
    return (a > b) ? a - b : b - a;
  endfunction

  typedef enum logic [1:0] {PhLat, PhFill, PhRead, PhDone} phase_e;

  phase_e      phase;
  longint      cycle;
  logic [NumTx-1:0] busy      [NumAll];
  logic [31:0]      exp_data  [NumAll][NumTx];
  logic             exp_wen   [NumAll][NumTx];
  longint           t_issue   [NumAll][NumTx];
  int unsigned      exp_lat   [NumAll][NumTx];
  int unsigned      issued    [NumAll];
  int unsigned      outstanding_total;
  int unsigned      lat_step;   // phase 1: next target (0 own tile, 1 other tile, 2.. groups)
  logic             lat_wait;

  assign rsp_ready_o = '1;

  function automatic int free_id(int unsigned c);
    for (int i = 0; i < NumTx; i++) if (!busy[c][i]) return i;
    return -1;
  endfunction

  // Request word for a given target in phase 1.
  function automatic int unsigned lat_word(int unsigned step);
    // step 0: bank 0 of tile 0, group 0 (own tile); step 1: tile 1 of group 0; step 2+g-1: group g
    if (step == 0) return 0;
    if (step == 1) return NumBanks;
    return (step - 1) * NumBanks * NumTiles;
  endfunction

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      phase <= PhLat;
      cycle <= 0;
      req_valid_o <= '0;
      for (int c = 0; c < NumAll; c++) begin
        busy[c]   <= '0;
        issued[c] <= 0;
        req_o[c]  <= '0;
      end
      outstanding_total <= 0;
      lat_step <= 0;
      lat_wait <= 1'b0;
      done_o <= 1'b0;
      checks_o <= 0; failures_o <= 0;
      n_local_o <= 0; n_intra_o <= 0; n_inter_o <= 0; n_stall_o <= 0; n_lat_checked_o <= 0;
    end else begin
      automatic int unsigned out_tot = outstanding_total;
      automatic int unsigned chk = checks_o, fail = failures_o;
      automatic int unsigned nl = n_local_o, ni = n_intra_o, ne = n_inter_o, ns = n_stall_o;
      cycle <= cycle + 1;

      // Responses
      for (int c = 0; c < NumAll; c++) begin
        if (rsp_valid_i[c]) begin
          automatic int id = int'(rsp_i[c].ini.id);
          chk++;
          if (!busy[c][id] || rsp_i[c].ini.core != CoreIdWidth'(c % NumCores)
              || rsp_i[c].ini.tile != TileIdWidth'(core_tile(c))
              || rsp_i[c].ini.group != GroupIdWidth'(core_group(c))) begin
            fail++;
            $display("core %0d: unexpected response id %0d", c, id);
          end else begin
            busy[c][id] <= 1'b0;
            out_tot--;
            if (rsp_i[c].wen != exp_wen[c][id]) begin
              fail++;
              $display("core %0d: response kind mismatch", c);
            end else if (!exp_wen[c][id] && phase == PhRead && rsp_i[c].rdata != exp_data[c][id]) begin
              fail++;
              $display("core %0d: read %08h, expected %08h", c, rsp_i[c].rdata, exp_data[c][id]);
            end
            if (phase == PhLat) begin
              chk++;
              n_lat_checked_o <= n_lat_checked_o + 1;
              lat_wait <= 1'b0;
              if (cycle - t_issue[c][id] != longint'(exp_lat[c][id])) begin
                fail++;
                $display("latency step %0d: %0d cycles, expected %0d", lat_step - 1,
                         cycle - t_issue[c][id], exp_lat[c][id]);
              end else begin
                $display("latency step %0d: %0d cycles as expected", lat_step - 1, exp_lat[c][id]);
              end
            end
          end
        end
      end

      // Handshakes of the current requests
      for (int c = 0; c < NumAll; c++) begin
        if (req_valid_o[c]) begin
          if (req_ready_i[c]) begin
            automatic int id = int'(req_o[c].ini.id);
            automatic int unsigned w = req_o[c].addr >> 2;
            busy[c][id]    <= 1'b1;
            t_issue[c][id] <= cycle;
            out_tot++;
            if (word_group(w) != core_group(c)) ne++;
            else if (word_tile(w) != core_tile(c)) ni++;
            else nl++;
          end else begin
            ns++;
          end
        end
      end

      // New requests
      for (int c = 0; c < NumAll; c++) begin
        automatic logic hs = req_valid_o[c] && req_ready_i[c];
        automatic logic can = !req_valid_o[c] || hs;
        automatic int id = -1;
        automatic logic [NumTx-1:0] b = busy[c];
        if (hs) b[req_o[c].ini.id] = 1'b1;
        for (int i = 0; i < NumTx; i++) if (!b[i] && id < 0) id = i;
        if (can) req_valid_o[c] <= 1'b0;
        if (can && id >= 0) begin
          automatic tcdm_req_t r = '0;
          automatic logic go = 1'b0;
          automatic int unsigned w = 0;
          r.ini.group = GroupIdWidth'(core_group(c));
          r.ini.tile  = TileIdWidth'(core_tile(c));
          r.ini.core  = CoreIdWidth'(c % NumCores);
          r.ini.id    = TransIdWidth'(id);
          case (phase)
            PhLat: if (c == 0 && !lat_wait && !hs && lat_step < NumGrps + 1) begin
              automatic int unsigned g;
              w = lat_word(lat_step);
              g = word_group(w);
              go = 1'b1;
              exp_lat[c][id] <= (lat_step == 0) ? 1 : (lat_step == 1) ? 3 :
                  3 + 4 * (abs_diff(g / DimY, 0) + abs_diff(g % DimY, 0) + 1);
              lat_step <= lat_step + 1;
              lat_wait <= 1'b1;
            end
            PhFill: if (issued[c] < WordsPerCore) begin
              w = c + issued[c] * NumAll;
              r.wen = 1'b1; r.be = 4'hF; r.wdata = word_value(w);
              go = 1'b1;
            end
            PhRead: if (issued[c] < ReadsPerCore) begin
              w = $urandom_range(TotalWords - 1);
              go = 1'b1;
              exp_data[c][id] <= word_value(w);
            end
            default: ;
          endcase
          if (go) begin
            r.addr = AddrWidth'(w) << 2;
            req_o[c] <= r;
            req_valid_o[c] <= 1'b1;
            exp_wen[c][id] <= r.wen;
            if (phase != PhLat) issued[c] <= issued[c] + 1;
          end
        end
      end

      // Phase changes once everything in flight has completed
      if (req_valid_o == '0 && out_tot == 0) begin
        automatic logic all_issued = 1'b1;
        case (phase)
          PhLat: if (lat_step == NumGrps + 1 && !lat_wait) begin
            phase <= PhFill;
            for (int c = 0; c < NumAll; c++) issued[c] <= 0;
          end
          PhFill: begin
            for (int c = 0; c < NumAll; c++) if (issued[c] < WordsPerCore) all_issued = 1'b0;
            if (all_issued) begin
              phase <= PhRead;
              for (int c = 0; c < NumAll; c++) issued[c] <= 0;
            end
          end
          PhRead: begin
            for (int c = 0; c < NumAll; c++) if (issued[c] < ReadsPerCore) all_issued = 1'b0;
            if (all_issued) begin
              phase <= PhDone;
              done_o <= 1'b1;
            end
          end
          default: ;
        endcase
      end

      outstanding_total <= out_tot;
      checks_o <= chk;
      failures_o <= fail;
      n_local_o <= nl; n_intra_o <= ni; n_inter_o <= ne; n_stall_o <= ns;
    end
  end

endmodule
