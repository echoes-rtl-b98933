40000000
3fffec43
3fffb10b
3fff4e59
3ffec42d
3ffe1288
3ffd3969
3ffc38d1
3ffb10c1
3ff9c13a
3ff84a3c
3ff6abc8
3ff4e5e0
3ff2f884
3ff0e3b6
3feea776
3fec43c7
3fe9b8a9
3fe7061f
3fe42c2a
3fe12acb
3fde0205
3fdab1d9
3fd73a4a
3fd39b5a
3fcfd50b
3fcbe75e
3fc7d258
3fc395f9
3fbf3246
3fbaa740
3fb5f4ea
3fb11b48
3fac1a5b
3fa6f228
3fa1a2b2
3f9c2bfb
3f968e07
3f90c8da
3f8adc77
3f84c8e2
3f7e8e1e
3f782c30
3f71a31b
3f6af2e3
3f641b8d
3f5d1d1d
3f55f796
3f4eaafe
3f473759
3f3f9cab
3f37dafa
3f2ff24a
3f27e29f
3f1fabff
3f174e70
3f0ec9f5
3f061e95
3efd4c54
3ef45338
3eeb3347
3ee1ec87
3ed87efc
3eceeaad
3ec52fa0
3ebb4ddb
3eb14563
3ea7163f
3e9cc076
3e92440d
3e87a10c
3e7cd778
3e71e759
3e66d0b4
3e5b9392
3e502ff9
3e44a5ef
3e38f57c
3e2d1ea8
3e212179
3e14fdf7
3e08b42a
3dfc4418
3defadca
3de2f148
3dd60e99
3dc905c5
3dbbd6d4
3dae81cf
3da106bd
3d9365a8
3d859e96
3d77b192
3d699ea3
3d5b65d2
3d4d0728
3d3e82ae
3d2fd86c
3d21086c
3d1212b7
3d02f757
3cf3b653
3ce44fb7
3cd4c38b
3cc511d9
3cb53aaa
3ca53e09
3c951bff
3c84d496
3c7467d9
3c63d5d1
3c531e88
3c42420a
3c314060
3c201994
3c0ecdb2
3bfd5cc4
3bebc6d5
3bda0bf0
3bc82c1f
3bb6276e
3ba3fde7
3b91af97
3b7f3c87
3b6ca4c4
3b59e85a
3b470753
3b3401bb
3b20d79e
3b0d8909
3afa1605
3ae67ea1
3ad2c2e8
3abee2e5
3aaadea6
3a96b636
3a8269a3
3a6df8f8
3a596442
3a44ab8e
3a2fcee8
3a1ace5f
3a05a9fd
39f061d2
39daf5e8
39c5664f
39afb313
3999dc42
3983e1e8
396dc414
395782d3
39411e33
392a9642
3913eb0e
38fd1ca4
38e62b13
38cf1669
38b7deb4
38a08402
38890663
387165e3
3859a292
3841bc7f
3829b3b9
3811884d
37f93a4b
37e0c9c3
37c836c2
37af8159
3796a996
377daf89
37649341
374b54ce
3731f440
371871a5
36fecd0e
36e5068a
36cb1e2a
36b113fd
3696e814
367c9a7e
36622b4c
36479a8e
362ce855
361214b0
35f71fb1
35dc0968
35c0d1e7
35a5793c
3589ff7a
356e64b2
3552a8f4
3536cc52
351acedd
34feb0a5
34e271bd
34c61236
34a99221
348cf190
34703095
34534f41
34364da6
34192bd5
33fbe9e2
33de87de
33c105db
33a363ec
3385a222
3367c090
3349bf48
332b9e5e
330d5de3
32eefdea
32d07e85
32b1dfc9
329321c7
32744493
32554840
32362ce0
3216f287
31f79948
31d82137
31b88a66
3198d4ea
317900d6
31590e3e
3138fd35
3118cdcf
30f8801f
30d8143b
30b78a36
3096e223
30761c18
30553828
30343667
301316eb
2ff1d9c7
2fd07f0f
2faf06da
2f8d713a
2f6bbe45
2f49ee0f
2f2800af
2f05f637
2ee3cebe
2ec18a58
2e9f291b
2e7cab1c
2e5a1070
2e37592c
2e148566
2df19534
2dce88aa
2dab5fdf
2d881ae8
2d64b9da
2d413ccd
2d1da3d5
2cf9ef09
2cd61e7f
2cb2324c
2c8e2a87
2c6a0746
2c45c8a0
2c216eaa
2bfcf97c
2bd8692b
2bb3bdce
2b8ef77d
2b6a164d
2b451a55
2b2003ac
2afad269
2ad586a3
2ab02071
2a8a9fea
2a650525
2a3f503a
2a19813f
29f3984c
29cd9578
29a778db
2981428c
295af2a3
29348937
290e0661
28e76a37
28c0b4d2
2899e64a
2872feb6
284bfe2f
2824e4cc
27fdb2a7
27d667d5
27af0472
27878893
275ff452
273847c8
2710830c
26e8a637
26c0b162
2698a4a6
2670801a
264843d9
261feffa
25f78497
25cf01c8
25a667a7
257db64c
2554edd1
252c0e4f
250317df
24da0a9a
24b0e699
2487abf7
245e5acc
2434f332
240b7543
23e1e117
23b836ca
238e7673
2364a02e
233ab414
2310b23e
22e69ac8
22bc6dca
22922b5e
2267d3a0
223d66a8
2212e492
21e84d76
21bda171
2192e09b
21680b0f
213d20e8
21122240
20e70f32
20bbe7d8
2090ac4d
20655cac
2039f90f
200e8190
1fe2f64c
1fb7575c
1f8ba4dc
1f5fdee6
1f340596
1f081907
1edc1953
1eb00696
1e83e0eb
1e57a86d
1e2b5d38
1dfeff67
1dd28f15
1da60c5d
1d79775c
1d4cd02c
1d2016e9
1cf34baf
1cc66e99
1c997fc4
1c6c7f4a
1c3f6d47
1c1249d8
1be51518
1bb7cf23
1b8a7815
1b5d100a
1b2f971e
1b020d6c
1ad47312
1aa6c82b
1a790cd4
1a4b4128
1a1d6544
19ef7944
19c17d44
19937161
196555b8
19372a64
1908ef82
18daa52f
18ac4b87
187de2a7
184f6aab
1820e3b0
17f24dd3
17c3a931
1794f5e6
1766340f
173763c9
17088531
16d99864
16aa9d7e
167b949d
164c7ddd
161d595d
15ee2738
15bee78c
158f9a76
15604013
1530d881
150163dc
14d1e242
14a253d1
1472b8a5
144310dd
14135c94
13e39be9
13b3cefa
1383f5e3
135410c3
13241fb6
12f422db
12c41a4f
1294062f
1263e699
1233bbac
12038584
11d3443f
11a2f7fc
1172a0d7
11423ef0
1111d263
10e15b4e
10b0d9d0
10804e06
104fb80e
101f1807
0fee6e0d
0fbdba40
0f8cfcbe
0f5c35a3
0f2b650f
0efa8b20
0ec9a7f3
0e98bba7
0e67c65a
0e36c82a
0e05c135
0dd4b19a
0da39978
0d7278eb
0d415013
0d101f0e
0cdee5f9
0cada4f5
0c7c5c1e
0c4b0b94
0c19b374
0be853de
0bb6ecef
0b857ec7
0b540982
0b228d42
0af10a22
0abf8043
0a8defc3
0a5c58c0
0a2abb59
09f917ac
09c76dd8
0995bdfd
09640837
09324ca7
09008b6a
08cec4a0
089cf867
086b26de
08395024
08077457
07d59396
07a3adff
0771c3b3
073fd4cf
070de172
06dbe9bb
06a9edc9
0677edbb
0645e9af
0613e1c5
05e1d61b
05afc6d0
057db403
054b9dd3
0519845e
04e767c5
04b54825
0483259d
0451004d
041ed854
03ecadcf
03ba80df
038851a2
03562038
0323ecbe
02f1b755
02bf801a
028d472e
025b0caf
0228d0bb
01f69373
01c454f5
0192155f
015fd4d2
012d936c
00fb514b
00c90e90
0096cb58
006487c4
003243f1
00000000
