0001f137
034000ef
0000006f
00050793
00000513
02058063
0015f713
0015d593
00070463
00f50533
00179793
fe0596e3
00008067
00008067
fa010113
000016b7
03a12a23
aec68713
aec68d13
04812e23
04912c23
05212a23
05312823
05412623
05512423
05612223
05712023
03812e23
03912c23
03b12823
aec68693
00000793
0a000813
fe078593
00068513
00078613
0ff5f593
07f67893
00760613
01150023
0ff67613
00150513
fec596e3
00d78793
0ff7f793
02068693
fd0796e3
00001837
ae882783
40070693
49670513
00068593
00d79613
00f647b3
0117d613
00f64633
00561793
00c7c7b3
0187d613
01f67613
ff060613
00c58023
00158593
fcb51ae3
49870493
4b070513
00048593
00d79613
00f647b3
0117d613
00f64633
00561793
00c7c7b3
0147d613
0ff67613
f8060613
00c5a023
00458593
fcb51ae3
00012637
000015b7
8f060f13
96058593
00bf05b3
8f060613
00d79513
00f547b3
0117d513
00f54533
00551793
00a7c7b3
0187d513
01f57513
ff050513
00a60023
00160613
fcc59ae3
4b070293
4f070513
00028593
00d79613
00f647b3
0117d613
00f64633
00561793
00c7c7b3
0147d613
0ff67613
f8060613
00c5a023
00458593
fcb51ae3
00006637
0000c5b7
d7060313
b8058593
00b305b3
d7060613
00d79513
00f547b3
0117d513
00f54533
00551793
00a7c7b3
0187d513
01f57513
ff050513
00a60023
00160613
fcc59ae3
4f070613
6d070c13
00060513
00d79593
00f5c7b3
0117d593
00f5c5b3
00559793
00b7c7b3
0147d593
0ff5f593
f8058593
00b52023
00450513
fcac1ae3
000035b7
00002537
61058893
76050513
00a88533
61058593
00d79e13
00fe47b3
0117de13
00fe4e33
005e1793
01c7c7b3
0187de13
01fe7e13
ff0e0e13
01c58023
00158593
fcb51ae3
6d070713
15070a13
00070513
00d79593
00f5c7b3
0117d593
00f5c5b3
00559793
00b7c7b3
0147d593
0ff5f593
f8058593
00b52023
00450513
fcaa1ae3
00002eb7
aece8e93
820e8393
b68e8e13
00038513
00d79593
00f5c7b3
0117d593
00f5c5b3
00559793
00b7c7b3
0187d593
01f5f593
ff058593
00b50023
00150513
fcae1ae3
b68e8d93
b90e8e13
000d8513
00d79593
00f5c7b3
0117d593
00f5c5b3
00559793
00b7c7b3
0147d593
0ff5f593
f8058593
00b52023
00450513
fcae1ae3
00001ab7
00002437
aef82423
01968693
3b040413
00000513
00500913
07f00b13
01c00b93
260a8a93
00070f93
00060793
00030593
0004a303
00000813
fe768613
00a12a23
00912c23
00078c93
00381513
41050533
00251513
00581493
008507b3
01a48733
00000513
01012e23
03412023
00d12423
02812223
00038e13
00e50a33
00a12823
00060993
00030493
00612623
00070513
00000393
00798733
00070403
007a0733
00070683
40745813
01044733
41070733
0ff77713
00000313
00070e63
00177813
00175713
00080463
00d30333
00169693
fe0716e3
00045463
40600333
00138393
006484b3
fb2398e3
00812703
00598993
020a0a13
f9371ee3
00050713
01012503
4064d493
00c12303
00a789b3
429b5263
07f00493
00998023
00150513
f5751ee3
01c12803
02012a03
00812683
00180813
02412403
000e0393
f0a818e3
01412503
01812483
000c8793
31050513
00448493
31040413
01968693
ed551ce3
000f8713
b90e8993
00002fb7
00002e37
00058313
000c8613
00098413
00000593
00000513
3ccf8f93
6dce0e13
49800b13
00af86b3
00040913
00ae07b3
01412423
fe468493
00090a93
00068a13
0014cb83
0004c803
00248493
018b9d13
01881c93
418d5d13
418cdc93
01acd463
000b8813
000a4b83
01881d13
418d5d13
018b9c93
418cdc93
019d5463
000b8813
001a4b83
01881d13
418d5d13
018b9c93
418cdc93
019d5463
000b8813
010a8023
002a0a13
001a8a93
f8969ce3
03868693
00e90913
f8d790e3
0c458593
00812a03
0c440413
31050513
f5659ee3
00000793
00078693
00038413
028e8493
00500e13
49800f93
07f00a93
00a00b13
64000b93
00070393
00088793
0002a903
00000713
00371513
00271593
40e50533
00e585b3
00151513
00159593
01350cb3
00958d33
00000513
00e12823
01412a23
00912c23
00d12e23
00060593
01950833
00090893
00000613
00000693
03212023
02a12223
01e12623
02512423
03912623
00c12703
00d80cb3
00000513
00c70a33
00000913
00a12423
012a0733
00070483
012c8733
00070503
4074df13
01e4c733
41e70733
0ff77713
00000293
00070e63
00177f13
00175713
000f0463
00a282b3
00151513
fe0716e3
0004d463
405002b3
00190913
005888b3
fbc918e3
00812503
00ec8c93
005a0a13
00150513
f9c51ae3
0c468693
01960613
f7f69ce3
02412503
4078d893
02012903
00c12f03
02812283
02c12c83
00ad0633
1d1ada63
07f00893
01160023
00150513
f36512e3
01012703
01412a03
01812483
00170713
01c12683
00058613
eca718e3
06468693
00428293
06448493
096f0f13
eb769ae3
00002937
00078893
000029b7
15490793
00038713
00000293
00040393
01900f13
b1e98993
00f12623
64fe8b13
1a900a93
fe7f0413
005987b3
01eb0fb3
ff77c683
ff67c583
01869813
01859513
41885813
41855513
00a85463
00058693
ff97c583
ff87c503
01869693
01859e13
01851813
418e5e13
41885813
4186d693
010e5463
00050593
ffb7c503
ffa7c803
01859d13
01851e13
01881593
418e5e13
4185d593
418d5d13
00be5463
00080513
ffd7c583
ffc7c803
01851513
01859493
01881e13
4184d493
418e5e13
41855513
01c4d463
00080593
fff7cc83
ffe7c803
01859593
018c9493
01881e13
4184d493
418e5e13
4185d593
01c4d463
00080c93
000f8813
018c9c93
418cdc93
00078f93
00580b93
001fc483
000fce03
01912423
01849c93
418cdc93
000c8913
018e1c93
418cdc93
012cd463
00048e13
018e1c93
418cdc93
00068493
0196d463
000e0493
00980023
00180813
000d0693
002f8f93
00050d13
00058513
00812583
fb0b94e3
00540413
01478793
03e40663
000b8f93
ec1ff06f
fff4c393
41f3d393
0074f4b3
bd9ff06f
fff8c693
41f6d693
00d8f8b3
e29ff06f
01940f13
06428293
e95f14e3
7f8e8e93
000e8293
07f00413
00062803
00c12e03
00030f93
000f8f03
000e0683
00000513
407f5593
00bf47b3
40b787b3
0ff7f793
00078e63
0017f593
0017d793
00058463
00d50533
00169693
fe0796e3
000f5463
40a00533
001e0e13
00a80833
001f8f93
fbce9ae3
40785813
17045063
07f00813
01028023
00460613
00128293
19030313
f8cc14e3
00002f37
35cf0f13
00002fb7
000f0293
35cf8f93
07f00413
00072503
00088e13
000e8813
000e0303
00080683
00000593
40735613
00c347b3
40c787b3
0ff7f793
00078e63
0017f613
0017d793
00060463
00d585b3
00169693
fe0796e3
00035463
40b005b3
00180813
00b50533
001e0e13
fb0f9ae3
40655513
0ca45e63
07f00513
00a28023
00470713
00128293
07888893
f8ea14e3
0001f7b7
80000837
00478793
00002337
00000e13
00180813
00000293
3b030313
41b78633
00a00413
000da583
00038e93
000f0893
000e8f83
00088703
407fd693
00dfc7b3
40d787b3
0ff7f793
00000693
00078e63
0017f513
0017d793
00050463
00e686b3
00171713
fe0796e3
000fd463
40d006b3
00188893
00d585b3
001e8e93
fb131ae3
01b607b3
00b7a023
001e0793
00b85663
00058813
000e0293
004d8d93
05438393
02878663
00078e13
f7dff06f
fff84793
41f7d793
00f87833
e9dff06f
fff54793
41f7d793
00f57533
f21ff06f
05c12403
00006737
0001f6b7
0056a023
0001f7b7
00d70713
02e7a623
05812483
05412903
05012983
04c12a03
04812a83
04412b03
04012b83
03c12c03
03812c83
03412d03
03012d83
00000513
06010113
00008067
12345678
