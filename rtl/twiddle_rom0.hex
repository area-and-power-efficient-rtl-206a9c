3fe6a09e667f3bcd3fe6a09e667f3bcd
3fed906bcf328d463fd87de2a6aea963
3fef6297cff75cb03fc8f8b83c69a60b
3fefd88da3d125263fb917a6bc29b42c
bfe8bc806b1517413fe44cf325091dd6
3feff621e3796d7e3fa91f65f10dd814
bfe7b5df226aafaf3fe57d69348ceca0
3fd58f9a75ab1fdd3fee212104f686e5
bfdb5d1009e15cc03feced7af43cc773
3feffd886084cd0d3f992155f7a3667e
bfe72d0837efff963fe610b7551d2cdf
3fd7088530fa459f3feddb13b6ccc23c
bfd9ef7943a8ed8a3fed4134d14dc93a
3fea29a7a04627823fe26d054cdd12df
bfef8764fa714ba93fc5e214448b3fc6
3fe11eb3541b4b233feb090a58150200
bfcc0b826a7e4f633fef38f3ac64e589
3fefff62169b92db3f8921d1fcdec784
bfe6e74454eaa8af3fe6591925f0783d
3fd7c3a9311dcce73fedb6526238a09b
bfd9372a63bc93d73fed696173c9e68b
3fea63091b02fae23fe21a799933eb59
bfef7599a3a120773fc76dd9de50bf31
3fe1734d63dedb493fead2bc9e21d511
bfca82a025b004513fef4e603b0b2f2d
3fee817bab4cd10d3fd35410c2e18152
bfec678b3488739b3fdd79775b86e389
3fb5f6d00a9aa4193fefe1cafcbd5b09
bfe49a449b9b09393fe87c400fba2ebf
3fec08c4267255493fdedc1952ef78d6
bfeebbd8c8df0b743fd1d3443f4cdb3e
3fe3fed9534556d43fe8fbcca3ef940d
bfbc3785c79ec2d53fefce15fd6da67b
3fefffd8858e8a923f7921f0fe670071
bfe6c40d73c182753fe67cf78491af10
3fd820e3b04eaac43feda383a9668988
bfd8daa52ec8a4b03fed7d0b02b8ecf9
3fea7f58529fe69d3fe1f0f08bbc861b
bfef6c3f7df5bbb73fc83366e89c64c6
3fe19d5a09f2b9b83feab7325916c0d4
bfc9bdcbf2dc43663fef58a2b1789e84
3fee9084361df7f23fd2f422daec0387
bfec5042012b69073fddd28f1481cc58
3fb787586a5d5b213fefdd539ff1f456
bfe473b51b9873473fe89c7e9a4dd4aa
3fec20de3fa971b03fde83e0eaf85114
bfeeadb2e8e7a88e3fd233bbabc3bb71
3fe425ff178e6bb13fe8dc45331698cc
bfbaa7b724495c033fefd37914220b84
3fef9fce55adb2c83fc38edbb0cd8d14
bfe9d1b1f5ea80d53fe2e780e3e8ea17
3fce56ca1e101a1b3fef168f53f7205d
bfe09e907417c5e13feb5889fe921405
3fe79400574f55e53fe5a28d2a5d7250
bfeff871dadb81df3fa5fc00d290cd43
3fdb020d6c7f40093fed02d4feb2bd92
bfd5ee27379ea6933fee100cca2980ac
3feefe220c0b95ec3fcfdcdc1adfedf9
bfeb8c38d27504e93fe0485626ae221a
3fc20116d4ec7bcf3fefae8e8e46cfbb
bfe338400d0c8e573fe995cf2ed80d22
3fecd7d9898b32f63fdbb7cf2304bd01
bfee31eae870ce253fd530d880af3c24
3fe55810389751373fe7d7836cc33db2
bfac428d12c0d7e33feff3830f8d575c
3feffff621621d023f6921f8becca4ba
bfe6b25ced2fe29c3fe68ed1eaa19c71
3fd84f6aaaf3903f3fed9a00dd8b3d46
bfd8ac4b86d5ed443fed86c48445a44f
3fea8d676e545ad23fe1dc1b64dc4872
bfef677556883cee3fc8961727c41804
3fe1b250171373bf3feaa9547a2cb98e
bfc95b49e9b62afa3fef5da6ed43685d
3fee97ec36016b303fd2c41a4e954520
bfec44833141c0043fddfeff66a941de
3fb84f8712c130a13fefdafa7514538c
bfe4605a692b32a23fe8ac871ede1d88
3fec2cd14931e3f13fde57a86d3cd825
bfeea68393e658003fd263e6995554ba
3fe4397f5b2a43803fe8cc6a75184655
bfb9dfb6eb24a85c3fefd60d2da75c9e
3fefa39bac7a17913fc32b7bf94516a7
bfe9c2d110f075c23fe2fbc24b441015
3fceb86b462de3483fef1090bc898f5f
bfe089112032b08c3feb658f14fdbc47
3fe7a4f707bf97d23fe59001d5f723df
bfeff753bb1b91643fa78dbaa5874686
3fdb2f971db319723fecf830e8ce467b
bfd5bee78b9db3b63fee18a02fdc66d9
3fef045a14cf738c3fcf7b7480bd3802
bfeb7f6686e792e93fe05df3ec31b8b7
3fc264994dfd34093fefaafbcb0cfddc
bfe32421ec49a61f3fe9a4dfa42b06b2
3fece2b32799a0603fdb8a7814fd5693
bfee298f4439197a3fd5604012f467b4
3fe56ac35197649f3fe7c6b89ce2d333
bfaab101bd5f83173feff4dc54b1bed3
3fefe7ea85482d603fb39d9f12c5a299
bfe84b7111af83fa3fe4d3bc6d589f7f
3fd3e39be96ec2713fee6a61c55d53a7
bfdcf34baee1cd213fec89f587029c13
3fe92aa41fc5a8153fe3c3c44981c518
bfefc56e3b7d9af63fbe8eb7fde4aa3f
3fdf5fdee656cda33febe41b611154c1
bfd1423eefc693783feed0835e999009
3fedd1fef38a915a3fd73763c9261092
bfed4b5b1b1875243fd9c17d440df9f2
3f95fd4d21fab2263feffe1c6870cb77
bfe622e44fec22ff3fe71bac960e41bf
3feafb8fd89f57b63fe133e9cfee254f
bfef3e6bbc1bbc653fcba96334f15dad
3fe258734cbb71103fea38184a593bc6
bfc6451a831d830d3fef830f4a40c60c
3fefbf470f0a8d883fc00ee8ad6fb85b
bfe94990e3ac4a6c3fe39c23e3d63029
3fd0e15b4e1749ce3feeddeb6a078651
bfdfb7575c24d2de3febcb54cb0d2327
3fe82a9c13f545ff3fe4f9cc25cca486
bfefeb9d2530410f3fb20c9674ed444d
3fdc997fc38653893feca08f19b9c449
bfd44310dc8936f03fee5a9d550467d3
3fef33685a3aaef03fcc6d90535d74dd
bfeb16742a4ca2f53fe1097248d0a957
3fc57f008654cbde3fef8ba737cb4b78
bfe2818bef4d3cba3fea1b26d2c0a75e
3fed36fc7bcbfbdc3fda1d6543b50ac0
bfede4160f6d8d813fd6d998638a0cb6
3fe5fe7cbde56a103fe73e558e079942
bf9c454f4ce53b1d3feffce09ce2a679
