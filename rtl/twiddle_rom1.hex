3fe6a09e667f3bcd3fe6a09e667f3bcd
bfd87de2a6aea9633fed906bcf328d46
3fe1c73b39ae68c83fea9b66290ea1a3
3fec38b2f180bdb13fde2b5d3806f63b
bfee9f4156c62dda3fd294062ed59f06
3fef0a7efb9230d73fcf19f97b215f1b
bfeb728345196e3e3fe073879922ffee
3fc2c8106e8e613a3fefa7557f08a517
bfe30ff7fce170353fe9b3e047f38741
3fefc26470e19fd33fbf564e56a9730e
bfe93a22499263fb3fe3affa292050b9
3fd111d262b1f6773feed740e7684963
bfdf8ba4dbf89aba3febd7c0ac6f952a
3fe83b0e0bff976e3fe4e6cabbe3e5e9
bfefe9cdad01883a3fb2d52092ce19f6
3fdcc66e9931c45e3fec954b213411f5
bfd4135c941766013fee6288ec48e112
3feff095658e71ad3faf656e79f820e0
bfe7f8ece35717713fe5328292a35596
3fd4d1e24278e76a3fee426a4b2bc17e
bfdc1249d8011ee73fecc1f0f3fcfc5c
3fe9777ef4c7d7423fe36058b10659f3
bfefb5797195d7413fc139f0cedaf577
3fe01cfc874c3eb73feba5aa673590d2
bfd04fb80e37fdae3feef178a3e473c2
3fedfeae622dbe2b3fd64c7ddd3f27c6
bfed17e7743e35dc3fdaa6c82b6d3fca
3fa2d865759455cd3feffa72effef75d
bfe5c77bbe65018c3fe771e75f037261
3feb3e4d3ef557123fe0c9704d5d898f
bfef2252f7763ada3fcd934fe5454311
3fe2bedb25faf3ea3fe9ef43ef29af94
bfc45576b1293e5a3fef97f924c9099b
3feffc251df1d3f83f9f693731d1cf01
bfe74f948da8d28d3fe5ec3495837074
3fd6aa9d7dc77e173feded05f7de47da
bfda4b4127dea1e53fed2cb220e0ef9f
3fea0c95eabaf9373fe2960727629ca8
bfef8fd5ffae41db3fc51bdf8597c5f2
3fe0f426bb2a8e7e3feb23cd470013b4
bfcccf8cb312b2863fef2dc9c9089a9d
3fee529f04729ffc3fd472b8a5571054
bfecabc169a0b9003fdc6c7f4997000b
3fb1440134d709b33fefed58ecb673c4
bfe50cc09f59a09b3fe81a1b33b57acc
3febbed7c49380ea3fdfe2f64be71210
bfeee482e25a9dbc3fd0b0d9cfdbdb90
3fe3884185dfeb223fe958efe48e6dd7
bfc072a047ba831d3fefbc1617e44186
3fef7ea629e63d6e3fc6a81304f64ab2
bfea4678c8119ac83fe243d5fb98ac1f
3fcb4732ef3d67223fef43d085ff92dd
bfe14915af336ceb3feaee04b43c1474
3fe70a42b3176d7a3fe63503a31c1be9
bfeffe9cb44b51a13f92d936bbe30efd
3fd993716141bdff3fed556f52e93eb1
bfd766340f2418f63fedc8d7cb410260
3feec9b2d3c3bf843fd172a0d7765177
bfebf064e15377dd3fdf3405963fd067
3fbdc70ecbae9fc93fefc8646cfeb721
bfe3d78238c583443fe91b166fd49da2
3fec7e8e52233cf33fdd2016e8e9db5b
bfee7227db6a97443fd3b3cefa0414b7
3fe4c0a145ec00043fe85bc51ae958cc
bfb46611792720963fefe5f3af2e3940
3fefff0943c53bd13f8f6a296ab997cb
bfe6f8ca99c95b753fe64715437f535b
3fd794f5e613dfae3fedbf9e4395759a
bfd96555b7ab948f3fed5f7172888a7f
3fea54c91090f5233fe22f2d662c13e2
bfef7a299c1a322a3fc70afd8d08c4ff
3fe15e36e4dbe2bc3feae068f345ecef
bfcae4f1d5f3b9ab3fef492206bcabb4
3fee79db29a5165a3fd383f5e353b6ab
bfec7315899eaad73fdd4cd02ba8609d
3fb52e774a4d4d0a3fefe3e92be9d886
bfe4ad79516722f13fe86c0a1d9aa195
3febfc9d25a1b1473fdf081906bff7fe
bfeec2cf4b1af6b23fd1a2f7fbe8f243
3fe3eb33eabe06803fe90b7943575efe
bfbcff533b307dc13fefcb4703914354
3fef93f14f85ac083fc4b8b17f79fa88
bfe9fdf4f13149de3fe2aa76e87aeb58
3fcd31774d2cbdee3fef2817fc4609ce
bfe0ded0b84bc4b63feb3115a5f37bf3
3fe760c52c3047643fe5d9dee73e345c
bfeffb55e425fdae3fa14685db42c17f
3fda790cd3dbf31b3fed2255c6e5a4e1
bfd67b949cad63cb3fedf5e36a9ba59c
3feeeb074c50a5443fd0804e05eb661e
bfebb249a0b6c40d3fe00740c82b82e1
3fc0d64dbcb267863fefb8d18d66adb7
bfe374531b817f8d3fe9683f42bd7fe1
3fecb6e20a00da993fdc3f6d47263129
bfee4a8dff81ce5e3fd4a253d11b82f3
3fe51fa81cd99aa63fe8098b756e52fa
bfb07b614e4630643fefef0102826191
3fefdf9922f733073fb6bf1b3e79b129
bfe88c66e7481ba13fe48703306091ff
3fd3241fb638baaf3fee89095bad6025
bfdda60c5cfa10d93fec5bef59fef85a
3fe8ec109b486c493fe41272663d108c
bfefd0d158d860873fbb6fa6ec38f64c
3fdeb00695f256203fec14d9dc465e57
bfd2038583d727be3feeb4cf515b8811
3fedacf42ce68ab93fd7f24dd37341e4
bfed733f508c0dff3fd908ef81ef7bd1
3f82d96b0e5097033fefffa72c978c4f
bfe66b0f3f52b3863fe6d5afef4aafcd
3feac4ffbd3efac83fe188591f3a46e5
bfef538b1faf2d073fca203e1b1831da
3fe205baa17560d63fea7138de9d60f5
bfc7d0a7bbd2cb1c3fef70f6434b7eb7
3fefb20dc681d54d3fc19d8940be24e7
bfe986aef14575943fe34c5252c14de1
3fd01f1806b9fdd23feef7d6e51ca3c0
bfe032ae55edbd963feb98fa1fd9155e
3fe7e83f87b036863fe5454ff5159dfc
bfeff21614e131ed3fadd406f9808ec9
3fdbe51517ffc0d93fecccee20c2dea0
bfd50163dc1970483fee3a33ec75ce85
3fef1c7abe2847083fcdf5163f01099a
bfeb4b7409de79253fe0b405878f85ec
3fc3f22f57db48933fef9bed7cfbde29
bfe2d333d34e9bb83fe9e082edb42472
3fed0d672f59d2b93fdad473125cdc09
bfee0766d9280f543fd61d595c88c202
3fe5b50b264f74483fe782fb1b90b35b
bfa46a396ff861793feff97c4208c014
