// pr_loader -- swaps the reconfigurable module in the SVM partition.
//
// The dynamic cascade keeps one classifier in a reconfigurable partition and
// replaces it at run time: first the melanoma-sensitive module (RM-M), then,
// for an instance that stage reports as non-melanoma, the benign-sensitive
// module (RM-N). On the FPGA this is done by a partial bitstream written
// through the device configuration port. The two modules have the same
// structure and differ only in their coefficients, so this block models a
// partial bitstream as a short configuration image that carries them:
//   word 0        {16'h5356 marker, rm_id[7:0], n_words[7:0] = N_ELEMS + 1}
//   words 1..N    AC[0] .. AC[N_ELEMS-1]
//   word  N+1     b
// The image format, the marker and the status outputs are this design's
// choices; the paper describes the swap only at the level of bitstreams.
//
// Behaviour: a valid header starts a reconfiguration: rm_loaded drops and
// reconfiguring rises, which holds the partition in reset and decouples it
// from the bus. The next N_ELEMS + 1 words are written into the
// coefficient memory, after which rm_id takes the image's identifier,
// rm_loaded rises and reconfiguring falls. A header with the wrong marker
// or length sets cfg_error and changes nothing else; cfg_error clears at
// the next valid header. No module is loaded after reset.
//
// Interface: cfg_valid/cfg_data/cfg_ready word stream, one word per cycle
// (cfg_ready is always high, since a word is taken every cycle);
// ac_we/ac_waddr/ac_wdata write the partition's coefficient memory, with
// ac_wdata wired straight from cfg_data.
module pr_loader #(
  parameter int unsigned N_ELEMS = svm_pkg::F,
  parameter int unsigned AW      = $clog2(N_ELEMS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_valid,
  input  logic [31:0]   cfg_data,
  output logic          cfg_ready,
  output logic          ac_we,
  output logic [AW-1:0] ac_waddr,
  output logic [31:0]   ac_wdata,
  output logic          rm_loaded,
  output logic [7:0]    rm_id,
  output logic          reconfiguring,
  output logic          cfg_error
);
  import svm_pkg::*;

  typedef enum logic {L_HDR, L_DATA} lstate_e;
  lstate_e       state;
  logic [AW-1:0] cnt;
  logic [7:0]    pend_id;
  logic          hdr_ok;

  assign cfg_ready = 1'b1;
  assign hdr_ok    = (cfg_data[31:16] == CFG_MARKER) &&
                     (32'(cfg_data[7:0]) == N_ELEMS + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= L_HDR;
      cnt           <= '0;
      pend_id       <= '0;
      rm_loaded     <= 1'b0;
      rm_id         <= '0;
      reconfiguring <= 1'b0;
      cfg_error     <= 1'b0;
    end else if (cfg_valid) begin
      unique case (state)
        L_HDR: begin
          if (hdr_ok) begin
            state         <= L_DATA;
            cnt           <= '0;
            pend_id       <= cfg_data[15:8];
            rm_loaded     <= 1'b0;
            reconfiguring <= 1'b1;
            cfg_error     <= 1'b0;
          end else begin
            cfg_error     <= 1'b1;
          end
        end
        L_DATA: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N_ELEMS) begin
            state         <= L_HDR;
            rm_loaded     <= 1'b1;
            rm_id         <= pend_id;
            reconfiguring <= 1'b0;
          end
        end
        default: state <= L_HDR;
      endcase
    end
  end

  assign ac_we    = cfg_valid && (state == L_DATA);
  assign ac_waddr = cnt;
  assign ac_wdata = cfg_data;

endmodule
