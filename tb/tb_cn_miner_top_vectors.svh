// Expected results for tb_cn_miner_top: 76-byte blobs differing in the
// nonce (bytes 39..42) and their CryptoNight-Haven hashes for a 1 KiB
// scratchpad and 64 Shuffle iterations, from an independent reference model.
  localparam int N = 7;
  logic [1079:0] blobs [N]; logic [255:0] exph [N]; logic [1:0] expa [N];
  initial begin
    blobs[0] = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000055381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407); exph[0] = 256'h072285533233f26335ac2cce47f797a699b607c0bcdd9dd7e80f4890b1532d65; expa[0] = 2'd0;
    blobs[1] = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000155381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407); exph[1] = 256'h750034a549a9f0ff2684a71d466271eb5c172fd6608976efd7374a59f19185aa; expa[1] = 2'd1;
    blobs[2] = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000255381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407); exph[2] = 256'h948fc0dc2ff6c11f400addbf326bb72ad4e35a59a0fb100f1b0542f1401a2412; expa[2] = 2'd2;
    blobs[3] = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000555381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407); exph[3] = 256'h081ccf158b067f86886ee43b9aaceb1d36f59d82a64c71ccfe6176df3bbf70cd; expa[3] = 2'd3;
    blobs[4] = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000655381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407); exph[4] = 256'hf34542b8a292062fc804bb26915b9ea272e7c37382e82e0b4ffa67f80e0c6c66; expa[4] = 2'd0;
    blobs[5] = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000755381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407); exph[5] = 256'h5e422151afdf5e2010bcbb8e0b5259a8cf23767a2661624f0362bdae966e9397; expa[5] = 2'd3;
    blobs[6] = 1080'(608'h86694c2f12f5d8bb9e8164472a0df0d3b6997c5f422508ebceb194775a3d2003e60000000855381bfee1c4a78a6d503316f9dcbfa285684b2e11f4d7ba9d806346290cefd2b5987b5e412407); exph[6] = 256'h86afd6a7b3c9a5e4d384116115922e28456424ab67553a2d60be8c5141123c61; expa[6] = 2'd2;
  end
